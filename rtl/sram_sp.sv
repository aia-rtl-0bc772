// sram_sp: single-port word memory with byte enables (behaviour of an SRAM macro).
//
// One bank of the global buffer. A request reads or writes one word; read
// data appears after the clock edge and is held until the next request.
// Written as a plain array, not reset. The 8KB bank size is the paper's.
module sram_sp #(
  parameter int unsigned WORDS = 2048,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [3:0]    be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++) if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end
      rdata_o <= mem[addr_i];
    end
  end

endmodule
