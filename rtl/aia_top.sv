// aia_top: the accelerator side of the AIA chip: the 4 x 4 mesh of
// sampling cores with its global buffer and event unit, and the two
// cross-clock FIFOs that join it to the SoC clock domain.
//
// The host processor, SoC interconnect and SoC memory, the uDMA and
// peripherals, the clock generation and the pads are not part of this
// RTL: the SoC side is brought out as a host transaction port in the SoC
// clock domain. A transaction (host_req_t: we, byte enables, address,
// write data) is accepted with valid/ready, crosses to the mesh domain,
// is carried out there, and exactly one 32-bit response word (read data,
// or 0 for a write) comes back through the second FIFO, again with
// valid/ready. Transactions are answered in order.
// Host address map: 0x1000_0000 + core * 0x1_0000 for a core's
// instruction memory (offset 0) and local data memory (offset 0x8000),
// 0x2000_0000 for the global buffer, 0x3000_0000 for the control registers
// (0x00 fetch enable per core, 0x04 halted cores, 0x08 barrier count).
// The two clocks may be unrelated. Each reset is asynchronous, active low,
// and must be released synchronously to its own clock.
// The two clock domains, the FIFO between them and the mesh follow the
// paper; the transaction format and the address map are this design's.
module aia_top
  import aia_pkg::*;
#(
  parameter int unsigned ROWS          = 4,
  parameter int unsigned COLS          = 4,
  parameter int unsigned IMEM_WORDS    = 2048,
  parameter int unsigned DMEM_WORDS    = 8192,
  parameter int unsigned GB_BANKS      = 16,
  parameter int unsigned GB_BANK_BYTES = 8192,
  parameter int unsigned FIFO_DEPTH    = 4
) (
  input  logic        clk_soc_i,
  input  logic        rst_soc_ni,
  input  logic        clk_mesh_i,
  input  logic        rst_mesh_ni,
  // host transactions, SoC clock domain
  input  logic        host_req_valid_i,
  output logic        host_req_ready_o,
  input  host_req_t   host_req_i,
  output logic        host_rsp_valid_o,
  input  logic        host_rsp_ready_i,
  output logic [31:0] host_rsp_o,
  // status, mesh clock domain
  output logic [ROWS*COLS-1:0] halted_o
);

  logic        m_req_valid, m_req_ready;
  host_req_t   m_req;
  logic        m_rsp_valid, m_rsp_ready;
  logic [31:0] m_rsp;

  cdc_fifo #(.WIDTH(HOST_REQ_W), .DEPTH(FIFO_DEPTH)) u_req_fifo (
    .wclk_i  (clk_soc_i),
    .wrst_ni (rst_soc_ni),
    .wvalid_i(host_req_valid_i),
    .wready_o(host_req_ready_o),
    .wdata_i (host_req_i),
    .rclk_i  (clk_mesh_i),
    .rrst_ni (rst_mesh_ni),
    .rvalid_o(m_req_valid),
    .rready_i(m_req_ready),
    .rdata_o (m_req)
  );

  aia_mesh #(
    .ROWS         (ROWS),
    .COLS         (COLS),
    .IMEM_WORDS   (IMEM_WORDS),
    .DMEM_WORDS   (DMEM_WORDS),
    .GB_BANKS     (GB_BANKS),
    .GB_BANK_BYTES(GB_BANK_BYTES)
  ) u_mesh (
    .clk_i      (clk_mesh_i),
    .rst_ni     (rst_mesh_ni),
    .req_valid_i(m_req_valid),
    .req_ready_o(m_req_ready),
    .req_i      (m_req),
    .rsp_valid_o(m_rsp_valid),
    .rsp_ready_i(m_rsp_ready),
    .rsp_o      (m_rsp),
    .halted_o
  );

  cdc_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_rsp_fifo (
    .wclk_i  (clk_mesh_i),
    .wrst_ni (rst_mesh_ni),
    .wvalid_i(m_rsp_valid),
    .wready_o(m_rsp_ready),
    .wdata_i (m_rsp),
    .rclk_i  (clk_soc_i),
    .rrst_ni (rst_soc_ni),
    .rvalid_o(host_rsp_valid_o),
    .rready_i(host_rsp_ready_i),
    .rdata_o (host_rsp_o)
  );

endmodule
