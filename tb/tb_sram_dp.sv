// tb_sram_dp: random test of the dual-port memory against a reference
// array. Both ports issue random reads and byte-masked writes each cycle,
// including to the same word. Read data must equal the word as it was before
// the edge and hold while the port is idle; when both ports write one word,
// port B's enabled bytes win. The memory is first written in full.
module tb_sram_dp;
  localparam int WORDS = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic a_req, a_we, b_req, b_we;
  logic [3:0] a_be, b_be;
  logic [4:0] a_addr, b_addr;
  logic [31:0] a_wdata, b_wdata, a_rdata, b_rdata, ref_mem [WORDS], a_exp, b_exp;
  int checks = 0, failures = 0;

  sram_dp #(.WORDS(WORDS)) dut (
    .clk_i(clk),
    .a_req_i(a_req), .a_we_i(a_we), .a_be_i(a_be), .a_addr_i(a_addr), .a_wdata_i(a_wdata), .a_rdata_o(a_rdata),
    .b_req_i(b_req), .b_we_i(b_we), .b_be_i(b_be), .b_addr_i(b_addr), .b_wdata_i(b_wdata), .b_rdata_o(b_rdata));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_req = 0; a_we = 0; a_be = 0; a_addr = 0; a_wdata = 0;
    b_req = 0; b_we = 0; b_be = 0; b_addr = 0; b_wdata = 0;
    for (int i = 0; i < WORDS; i++) begin
      a_req = 1; a_we = 1; a_be = 4'hF; a_addr = 5'(i); a_wdata = $urandom;
      ref_mem[i] = a_wdata;
      @(posedge clk); #1;
    end
    a_we = 0; a_addr = 0; b_req = 1; b_addr = 0; @(posedge clk); #1;
    a_exp = ref_mem[0]; b_exp = ref_mem[0];
    for (int n = 0; n < 5000; n++) begin
      a_req = ($urandom % 3) != 0; a_we = 1'($urandom); a_be = 4'($urandom);
      b_req = ($urandom % 3) != 0; b_we = 1'($urandom); b_be = 4'($urandom);
      a_addr = 5'($urandom % 8); b_addr = 5'($urandom % 8);   // frequent collisions
      a_wdata = $urandom; b_wdata = $urandom;
      @(posedge clk); #1;
      if (a_req) a_exp = ref_mem[a_addr];
      if (b_req) b_exp = ref_mem[b_addr];
      if (a_req && a_we) for (int b = 0; b < 4; b++) if (a_be[b]) ref_mem[a_addr][b*8 +: 8] = a_wdata[b*8 +: 8];
      if (b_req && b_we) for (int b = 0; b < 4; b++) if (b_be[b]) ref_mem[b_addr][b*8 +: 8] = b_wdata[b*8 +: 8];
      checks += 2;
      if (a_rdata !== a_exp) begin failures++; if (failures < 10) $display("FAIL: A n=%0d got %h exp %h", n, a_rdata, a_exp); end
      if (b_rdata !== b_exp) begin failures++; if (failures < 10) $display("FAIL: B n=%0d got %h exp %h", n, b_rdata, b_exp); end
    end
    // final contents
    a_we = 0; b_req = 0;
    for (int i = 0; i < WORDS; i++) begin
      a_req = 1; a_addr = 5'(i); @(posedge clk); #1;
      checks++;
      if (a_rdata !== ref_mem[i]) begin failures++; $display("FAIL: final word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
