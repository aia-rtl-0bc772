// tb_lfsr_rng: self-checking test of the sampler's random-bit source.
//
// A model register is shifted one bit at a time with the taps 32, 22, 2, 1;
// after every step of the unit (16 shifts) the presented bits are compared.
// Also checked: reset value, seeding, the all-zero seed guard, holding when
// not stepped, and a rough balance of ones over 2000 steps.
module tb_lfsr_rng;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic seed_we, step;
  logic [31:0] seed, model;
  logic [15:0] rb;
  int checks = 0, failures = 0, ones = 0;

  lfsr_rng dut (.clk_i(clk), .rst_ni(rst_n), .seed_we_i(seed_we), .seed_i(seed),
                .step_i(step), .rb_o(rb));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] shift1(input logic [31:0] s);
    logic fb = s[31] ^ s[21] ^ s[1] ^ s[0];
    return {s[30:0], fb};
  endfunction

  initial begin
    seed_we = 0; step = 0; seed = 0;
    @(posedge clk); #1 rst_n = 1;
    check(rb == 16'h2024, "reset value");
    model = 32'hACE1_2024;
    for (int t = 0; t < 2000; t++) begin
      step = ($urandom % 4 != 0);
      @(posedge clk); #1;
      if (step) for (int i = 0; i < 16; i++) model = shift1(model);
      check(rb == model[15:0], $sformatf("step %0d: %h vs %h", t, rb, model[15:0]));
      ones += $countones(rb);
    end
    step = 0;
    check(ones > 2000 * 16 * 45 / 100 && ones < 2000 * 16 * 55 / 100, $sformatf("balance: %0d ones", ones));
    seed_we = 1; seed = 32'h1234_5678; @(posedge clk); #1 seed_we = 0;
    check(rb == 16'h5678, "seed load");
    seed_we = 1; seed = 0; step = 1; @(posedge clk); #1 seed_we = 0; step = 0;
    check(rb == 16'h0001, "zero seed guard, seed wins over step");
    repeat (3) @(posedge clk); #1;
    check(rb == 16'h0001, "holds without step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
