// tb_interp_unit: self-checking test of the LUT interpolation unit.
//
// A behavioural private register file holds a random table. For each entry
// width (32, 16, 8 bit) and random fraction points and inputs, the output
// is compared with floor((Y[i]*(2^F - f) + Y[i+1]*f) / 2^F) computed here
// from the unpacked table. A 16-entry 8-bit exp table (the paper's LUT
// size) is also checked at a few exact grid points and midpoints.
module tb_interp_unit;
  logic [31:0] rs1, csr, da, db, y;
  logic [4:0]  aa, ab;
  logic [31:0] priv [32];
  int checks = 0, failures = 0;

  interp_unit dut (.rs1_i(rs1), .csr_i(csr), .iu_adr_a_o(aa), .iu_adr_b_o(ab),
                   .iu_data_a_i(da), .iu_data_b_i(db), .result_o(y));
  assign da = priv[aa];
  assign db = priv[ab];

  function automatic longint tab(input int prec, input int i);
    int e = 1 << prec, wd = 32 >> prec;
    logic [31:0] word = priv[(i / e) % 32];
    longint v = longint'((word >> ((i % e) * wd)) & ((64'd1 << wd) - 1));
    if (v >= (64'sd1 <<< (wd - 1))) v -= (64'sd1 <<< wd);
    return v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      automatic int prec = t % 3;
      automatic int F    = $urandom % 25;
      automatic int nent = 32 << prec;
      automatic longint i, f, ya, yb, expv;
      foreach (priv[k]) priv[k] = $urandom;
      i = $urandom % (nent - 1);
      f = (F == 0) ? 0 : ($urandom % (1 << F));
      rs1 = 32'((i << F) | f);
      if ((64'(rs1) >> F) != i) rs1 = 32'(f);            // keep i in range of 32 bits
      i = 64'(rs1) >> F;
      csr = {3'b0, 5'(F), 17'd0, 2'(prec), 5'd0};
      #1;
      ya = tab(prec, int'(i % nent));
      yb = tab(prec, int'((i + 1) % nent));
      expv = (ya * ((64'sd1 <<< F) - f) + yb * f) >>> F;
      check(y == 32'(expv), $sformatf("prec %0d F %0d i %0d f %0d: got %0d expected %0d",
                                      prec, F, i, f, $signed(y), expv));
    end
    // 16-entry 8-bit table of round(100*exp(-i/4)) (a real-to-int cast rounds), packed four per register
    for (int k = 0; k < 16; k++) begin
      automatic int v = int'(100.0 * $exp(-k / 4.0));
      priv[k / 4][(k % 4) * 8 +: 8] = 8'(v);
    end
    csr = {3'b0, 5'd24, 17'd0, 2'd2, 5'd0};   // 24 fraction bits, 8-bit entries
    rs1 = 32'd3 << 24; #1;
    check(y == 32'd47, $sformatf("exp table at 3: %0d, expected 47", y));
    rs1 = (32'd2 << 24) | (32'd1 << 23); #1;  // 2.5: (61 + 47) / 2 = 54
    check(y == 32'd54, $sformatf("exp table at 2.5: %0d, expected 54", y));
    check(aa == 5'd0 && ab == 5'd0, "2.5 reads register 0 twice");
    rs1 = (32'd3 << 24) | (32'd1 << 22); #1;  // 3.25: 47 + (37-47)/4 = 44.5 -> 44
    check(y == 32'd44 && aa == 5'd0 && ab == 5'd1, $sformatf("exp table at 3.25: %0d adr %0d %0d", y, aa, ab));
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
