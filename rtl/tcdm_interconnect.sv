// tcdm_interconnect: crossbar between the masters that share the global
// buffer and its banks.
//
// Words are interleaved over the banks: bank = word address mod N_BANKS,
// row within the bank = word address / N_BANKS. Every bank has a
// round-robin arbiter; a master whose bank picks it is granted in the same
// cycle (gnt) and receives rvalid and the read data one cycle later. Masters
// that lose wait and keep their request up. Masters 0..3 are the top-row
// accelerator cores, the last master is the host path of the mesh
// interconnect.
// The paper names the interconnect and says only the top four cores reach
// the global buffer; interleaving, arbitration and timing are this design's.
module tcdm_interconnect
  import aia_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 5,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 2048,
  localparam int unsigned BW  = $clog2(N_BANKS),
  localparam int unsigned RW  = $clog2(BANK_WORDS)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  mem_req_t          m_req_i [N_MASTERS],
  output mem_rsp_t          m_rsp_o [N_MASTERS],
  output logic              b_req_o   [N_BANKS],
  output logic              b_we_o    [N_BANKS],
  output logic [3:0]        b_be_o    [N_BANKS],
  output logic [RW-1:0]     b_addr_o  [N_BANKS],
  output logic [31:0]       b_wdata_o [N_BANKS],
  input  logic [31:0]       b_rdata_i [N_BANKS]
);

  localparam int unsigned MW = (N_MASTERS > 1) ? $clog2(N_MASTERS) : 1;

  logic [BW-1:0]  m_bank [N_MASTERS];
  logic [MW-1:0]  rr_q   [N_BANKS];
  logic [N_MASTERS-1:0] gnt;
  logic [MW-1:0]  win    [N_BANKS];
  logic           win_v  [N_BANKS];
  logic [N_MASTERS-1:0] rvalid_q;
  logic [BW-1:0]  rbank_q [N_MASTERS];

  always_comb begin
    for (int m = 0; m < int'(N_MASTERS); m++) m_bank[m] = m_req_i[m].addr[BW+1:2];
    gnt = '0;
    for (int b = 0; b < int'(N_BANKS); b++) begin
      win[b]   = '0;
      win_v[b] = 1'b0;
      // first requesting master at or after the round-robin pointer
      for (int i = 0; i < int'(N_MASTERS); i++) begin
        automatic int m = (int'(rr_q[b]) + i) % int'(N_MASTERS);
        if (!win_v[b] && m_req_i[m].req && m_bank[m] == BW'(b)) begin
          win_v[b] = 1'b1;
          win[b]   = MW'(m);
        end
      end
      if (win_v[b]) gnt[win[b]] = 1'b1;
      b_req_o[b]   = win_v[b];
      b_we_o[b]    = m_req_i[win[b]].we;
      b_be_o[b]    = m_req_i[win[b]].be;
      b_addr_o[b]  = m_req_i[win[b]].addr[BW+2 +: RW];
      b_wdata_o[b] = m_req_i[win[b]].wdata;
    end
    for (int m = 0; m < int'(N_MASTERS); m++) begin
      m_rsp_o[m].gnt    = gnt[m];
      m_rsp_o[m].rvalid = rvalid_q[m];
      m_rsp_o[m].rdata  = b_rdata_i[rbank_q[m]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= '0;
      for (int b = 0; b < int'(N_BANKS); b++)   rr_q[b] <= '0;
      for (int m = 0; m < int'(N_MASTERS); m++) rbank_q[m] <= '0;
    end else begin
      rvalid_q <= gnt;
      for (int m = 0; m < int'(N_MASTERS); m++) if (gnt[m]) rbank_q[m] <= m_bank[m];
      for (int b = 0; b < int'(N_BANKS); b++)
        if (win_v[b]) rr_q[b] <= (int'(win[b]) == int'(N_MASTERS) - 1) ? '0 : win[b] + MW'(1);
    end
  end

  // one master per bank per cycle
  for (genvar b = 0; b < N_BANKS; b++) begin : g_chk
    a_bank_single: assert property (@(posedge clk_i) disable iff (!rst_ni)
      win_v[b] |-> m_req_i[win[b]].req);
  end

endmodule
