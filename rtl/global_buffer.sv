// global_buffer: the 128KB tightly coupled global buffer of the mesh.
//
// N_BANKS single-port banks of BANK_BYTES each (16 x 8KB), word-interleaved
// and shared through tcdm_interconnect by the four top-row cores and the
// host path. Request/grant in one cycle, read data one cycle after the grant.
// The bank count and size follow the paper; the rest is described in
// tcdm_interconnect.
module global_buffer
  import aia_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 5,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_BYTES = 8192
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t m_req_i [N_MASTERS],
  output mem_rsp_t m_rsp_o [N_MASTERS]
);

  localparam int unsigned BANK_WORDS = BANK_BYTES / 4;
  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic          b_req   [N_BANKS];
  logic          b_we    [N_BANKS];
  logic [3:0]    b_be    [N_BANKS];
  logic [RW-1:0] b_addr  [N_BANKS];
  logic [31:0]   b_wdata [N_BANKS];
  logic [31:0]   b_rdata [N_BANKS];

  tcdm_interconnect #(
    .N_MASTERS (N_MASTERS),
    .N_BANKS   (N_BANKS),
    .BANK_WORDS(BANK_WORDS)
  ) u_xbar (
    .clk_i, .rst_ni, .m_req_i, .m_rsp_o,
    .b_req_o(b_req), .b_we_o(b_we), .b_be_o(b_be), .b_addr_o(b_addr),
    .b_wdata_o(b_wdata), .b_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    sram_sp #(.WORDS(BANK_WORDS)) u_bank (
      .clk_i,
      .req_i  (b_req[b]),
      .we_i   (b_we[b]),
      .be_i   (b_be[b]),
      .addr_i (b_addr[b]),
      .wdata_i(b_wdata[b]),
      .rdata_o(b_rdata[b])
    );
  end

endmodule
