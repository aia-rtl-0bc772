// tb_ky_decoder: self-checking test of the reconfigurable Knuth-Yao decoder.
//
// Checks the two columns of the paper's uniform example (0 then F with
// random bits 0,0 give d' = 1 then -1 and the rejection row 3; random bits
// 1,0 give d' = 0 then -3 and row 1), then random columns in every lane
// mode against a serial model: subtract the lane's bits one by one from
// 2d + !rb and report the first row at which the value turns negative.
module tb_ky_decoder;
  logic [2:0]        mode;
  logic [5:0]        nbins;
  logic [31:0]       col;
  logic [15:0]       rej, hit;
  logic signed [7:0] dd [16], dn [16];
  logic [5:0]        idx [16];
  int checks = 0, failures = 0;

  ky_decoder dut (.mode_i(mode), .nbins_i(nbins), .col_i(col), .rej_bit_i(rej),
                  .dd_i(dd), .d_next_o(dn), .hit_o(hit), .index_o(idx));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (dd[k]) dd[k] = 0;
    // paper example, 3 bins + rejection row, one lane
    mode = 0; nbins = 3;
    col = 32'h0; rej = 16'h0; dd[0] = 1; #1;            // level 1, rb=0: 2*0+1
    check(dn[0] == 1 && !hit[0], "example level 1: d' = 1");
    col = 32'h7; rej = 16'h1; dd[0] = 3; #1;            // level 0, rb=0: 2*1+1
    check(dn[0] == -1 && hit[0] && idx[0] == 3, "example level 0: d' = -1, rejection row");
    col = 32'h0; rej = 16'h0; dd[0] = 0; #1;            // restart, rb=1
    check(dn[0] == 0 && !hit[0], "example retry level 1: d' = 0");
    col = 32'h7; rej = 16'h1; dd[0] = 1; #1;            // rb=0: 2*0+1
    check(dn[0] == -3 && hit[0] && idx[0] == 1, "example retry level 0: d' = -3, row 1");

    for (int t = 0; t < 5000; t++) begin
      automatic int m = t % 5, L = 1 << (t % 5), W = 32 >> (t % 5);
      mode = 3'(m);
      nbins = 6'(1 + $urandom % W);
      col = $urandom; rej = 16'($urandom);
      foreach (dd[k]) dd[k] = 8'($urandom % (W + 3));
      #1;
      for (int k = 0; k < L; k++) begin
        automatic int d = dd[k], row = -1;
        for (int i = 0; i <= nbins; i++) begin
          automatic int b = (i < nbins) ? col[k*W + i] : rej[k];
          d -= b;
          if (d < 0 && row < 0) row = i;
        end
        check(dn[k] == 8'(d), $sformatf("mode %0d lane %0d d' %0d vs %0d", m, k, dn[k], d));
        check(hit[k] == (row >= 0), "hit flag");
        if (row >= 0) check(idx[k] == 6'(row), $sformatf("mode %0d lane %0d row %0d vs %0d", m, k, idx[k], row));
      end
      for (int k = L; k < 16; k++) check(!hit[k], "unused lanes idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
