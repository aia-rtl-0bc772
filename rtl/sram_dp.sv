// sram_dp: dual-port word memory with byte enables (behaviour of an SRAM macro).
//
// Used for each core's instruction memory and data scratchpad: port A
// serves the core, port B the host through the mesh interconnect. Each port
// reads synchronously: the word addressed in a cycle with req high appears
// on rdata after the clock edge and stays there until the next request on
// that port. A write updates the bytes whose enable is set. If both ports
// write the same word in one cycle, port B's bytes land last.
// Written as a plain array so synthesis can map it to a macro; the memory
// is not reset. The paper gives the total (640KB for 16 cores); the port
// arrangement is this design's.
module sram_dp #(
  parameter int unsigned WORDS = 2048,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          a_req_i,
  input  logic          a_we_i,
  input  logic [3:0]    a_be_i,
  input  logic [AW-1:0] a_addr_i,
  input  logic [31:0]   a_wdata_i,
  output logic [31:0]   a_rdata_o,
  input  logic          b_req_i,
  input  logic          b_we_i,
  input  logic [3:0]    b_be_i,
  input  logic [AW-1:0] b_addr_i,
  input  logic [31:0]   b_wdata_i,
  output logic [31:0]   b_rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (a_req_i) begin
      if (a_we_i) begin
        for (int b = 0; b < 4; b++) if (a_be_i[b]) mem[a_addr_i][b*8 +: 8] <= a_wdata_i[b*8 +: 8];
      end
      a_rdata_o <= mem[a_addr_i];
    end
    if (b_req_i) begin
      if (b_we_i) begin
        for (int b = 0; b < 4; b++) if (b_be_i[b]) mem[b_addr_i][b*8 +: 8] <= b_wdata_i[b*8 +: 8];
      end
      b_rdata_o <= mem[b_addr_i];
    end
  end

endmodule
