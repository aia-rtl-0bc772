// ac_tile: one accelerator core with its own instruction memory and local
// data scratchpad.
//
// The core fetches from the instruction memory (IMEM_WORDS words, boot
// address 0). Its data accesses go to the local scratchpad (DMEM_WORDS
// words, granted at once, answered next cycle) unless address bits [31:28]
// are 2: those go to the global buffer through the TCDM port. Only the
// four top-row tiles have that port (HAS_GB = 1); elsewhere such an access
// completes at once with read data 0 and writes are dropped.
// The host reaches both memories through a second port on each: host
// address bit 15 = 0 selects the instruction memory, 1 the scratchpad; the
// port is always granted and answers (rvalid, read data) one cycle later.
// Per core the paper gives 40KB of memory in all (640KB for 16 cores) and
// the global-buffer access of the top four cores only; the 8KB + 32KB
// split and the address decoding are this design's.
module ac_tile
  import aia_pkg::*;
#(
  parameter int unsigned CORE_ID    = 0,
  parameter bit          HAS_GB     = 1'b1,
  parameter int unsigned IMEM_WORDS = 2048,
  parameter int unsigned DMEM_WORDS = 8192
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        fetch_en_i,
  input  logic        clk_en_i,
  output logic        halted_o,
  // host access to the tile memories
  input  mem_req_t    host_req_i,
  output mem_rsp_t    host_rsp_o,
  // global buffer (TCDM) port
  output mem_req_t    gb_req_o,
  input  mem_rsp_t    gb_rsp_i,
  // neighbour links
  output logic [3:0]  nb_req_o,
  output logic [4:0]  nb_adr_o,
  input  logic [3:0]  nb_gnt_i,
  input  logic [31:0] nb_data_i [4],
  input  logic [3:0]  nb_in_req_i,
  input  logic [4:0]  nb_in_adr_i [4],
  output logic [3:0]  nb_in_gnt_o,
  output logic [31:0] nb_in_data_o,
  // event unit
  output logic        barrier_req_o,
  input  logic        barrier_release_i
);

  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);

  logic        instr_req;
  logic [31:0] instr_addr, instr_rdata;
  mem_req_t    dreq;
  mem_rsp_t    drsp;

  ac_core #(.CORE_ID(CORE_ID)) u_core (
    .clk_i, .rst_ni, .fetch_en_i, .clk_en_i, .halted_o,
    .instr_req_o  (instr_req),
    .instr_addr_o (instr_addr),
    .instr_rdata_i(instr_rdata),
    .data_req_o   (dreq),
    .data_rsp_i   (drsp),
    .nb_req_o, .nb_adr_o, .nb_gnt_i, .nb_data_i,
    .nb_in_req_i, .nb_in_adr_i, .nb_in_gnt_o, .nb_in_data_o,
    .barrier_req_o, .barrier_release_i
  );

  // ---------------- core data routing -------------------------------------
  logic to_gb, loc_req, nogb_req;
  logic loc_rvalid_q, nogb_rvalid_q;
  logic [31:0] loc_rdata;
  assign to_gb    = (dreq.addr[31:28] == REGION_GB);
  assign loc_req  = dreq.req && !to_gb;
  assign nogb_req = dreq.req && to_gb && !HAS_GB;

  always_comb begin
    gb_req_o     = dreq;
    gb_req_o.req = dreq.req && to_gb && HAS_GB;
    drsp.gnt     = loc_req || nogb_req || (gb_req_o.req && gb_rsp_i.gnt);
    drsp.rvalid  = loc_rvalid_q || nogb_rvalid_q || (HAS_GB && gb_rsp_i.rvalid);
    drsp.rdata   = loc_rvalid_q ? loc_rdata : (nogb_rvalid_q ? 32'd0 : gb_rsp_i.rdata);
  end

  // ---------------- host port ---------------------------------------------
  logic host_imem, host_rvalid_q, host_sel_d_q;
  logic [31:0] host_i_rdata, host_d_rdata;
  assign host_imem = !host_req_i.addr[15];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      loc_rvalid_q  <= 1'b0;
      nogb_rvalid_q <= 1'b0;
      host_rvalid_q <= 1'b0;
      host_sel_d_q  <= 1'b0;
    end else begin
      loc_rvalid_q  <= loc_req;
      nogb_rvalid_q <= nogb_req;
      host_rvalid_q <= host_req_i.req;
      if (host_req_i.req) host_sel_d_q <= !host_imem;
    end
  end

  assign host_rsp_o.gnt    = host_req_i.req;
  assign host_rsp_o.rvalid = host_rvalid_q;
  assign host_rsp_o.rdata  = host_sel_d_q ? host_d_rdata : host_i_rdata;

  // ---------------- memories ----------------------------------------------
  sram_dp #(.WORDS(IMEM_WORDS)) u_imem (
    .clk_i,
    .a_req_i  (instr_req),
    .a_we_i   (1'b0),
    .a_be_i   (4'b0000),
    .a_addr_i (instr_addr[IAW+1:2]),
    .a_wdata_i('0),
    .a_rdata_o(instr_rdata),
    .b_req_i  (host_req_i.req && host_imem),
    .b_we_i   (host_req_i.we),
    .b_be_i   (host_req_i.be),
    .b_addr_i (host_req_i.addr[IAW+1:2]),
    .b_wdata_i(host_req_i.wdata),
    .b_rdata_o(host_i_rdata)
  );

  sram_dp #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk_i,
    .a_req_i  (loc_req),
    .a_we_i   (dreq.we),
    .a_be_i   (dreq.be),
    .a_addr_i (dreq.addr[DAW+1:2]),
    .a_wdata_i(dreq.wdata),
    .a_rdata_o(loc_rdata),
    .b_req_i  (host_req_i.req && !host_imem),
    .b_we_i   (host_req_i.we),
    .b_be_i   (host_req_i.be),
    .b_addr_i (host_req_i.addr[DAW+1:2]),
    .b_wdata_i(host_req_i.wdata),
    .b_rdata_o(host_d_rdata)
  );

endmodule
