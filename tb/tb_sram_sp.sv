// tb_sram_sp: random test of the single-port memory against a reference
// array. Each cycle issues a random read or byte-masked write (or nothing);
// after the edge the read data must equal the reference word as it was
// before the edge (a write returns the old word), and it must hold while
// there is no request. The memory is first written in full so that nothing
// uninitialised is read.
module tb_sram_sp;
  localparam int WORDS = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic req, we;
  logic [3:0] be;
  logic [5:0] addr;
  logic [31:0] wdata, rdata, ref_mem [WORDS], exp_q;
  int checks = 0, failures = 0;

  sram_sp #(.WORDS(WORDS)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be),
                                .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    for (int i = 0; i < WORDS; i++) begin
      req = 1; we = 1; be = 4'hF; addr = 6'(i); wdata = $urandom;
      ref_mem[i] = wdata;
      @(posedge clk); #1;
    end
    req = 1; we = 0; addr = 0; @(posedge clk); #1;
    exp_q = ref_mem[0];
    for (int n = 0; n < 5000; n++) begin
      req = ($urandom % 4) != 0; we = 1'($urandom); be = 4'($urandom);
      addr = 6'($urandom); wdata = $urandom;
      @(posedge clk); #1;
      if (req) begin
        automatic logic [31:0] old = ref_mem[addr];
        if (we) for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][b*8 +: 8] = wdata[b*8 +: 8];
        exp_q = old;
      end
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL: n=%0d addr=%0d got %h exp %h", n, addr, rdata, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
