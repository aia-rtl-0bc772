// tb_ky_sampler: self-checking test of the rejection-based Knuth-Yao sampler.
//
// A behavioural private register file answers the row (SU.A) and column
// (SU.B) ports. Three groups of checks:
//  * the uniform 3-bin example {1,1,1} with random bits 0,0,1,0: the first
//    walk hits the rejection leaf, the second returns label 1 after four
//    tree levels in all;
//  * random distributions in every lane mode, compared label by label and
//    cycle by cycle with a reference model that walks the tree with the
//    classic serial Knuth-Yao subtraction, using the same random bits;
//  * a histogram of 3000 draws from {3,1,6} against the target probabilities.
module tb_ky_sampler;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start;
  logic [31:0] cfg;
  logic [4:0]  adr_a, adr_b;
  logic [31:0] data_a, data_b;
  logic [15:0] rb;
  logic        rb_take, busy, done;
  logic [31:0] result;
  logic [31:0] priv [32];

  int checks = 0, failures = 0;

  ky_sampler dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg),
    .su_adr_a_o(adr_a), .su_data_a_i(data_a), .su_adr_b_o(adr_b), .su_data_b_i(data_b),
    .rb_i(rb), .rb_take_o(rb_take), .busy_o(busy), .done_o(done), .result_o(result)
  );

  assign data_a = priv[adr_a];
  always_comb for (int r = 0; r < 32; r++) data_b[r] = priv[r][adr_b];

  // random-bit source: either a scripted list or $urandom; every consumed
  // value is recorded for the reference model
  logic [15:0] script [$];
  logic [15:0] used   [$];
  always_ff @(posedge clk) if (rb_take) begin
    used.push_back(rb);
    rb <= (script.size() > 0) ? script.pop_front() : 16'($urandom);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int clog2w(input longint unsigned s);
    int w = 0;
    while ((64'd1 << w) < s) w++;
    return w;
  endfunction

  // Reference: lanes walk in lock-step; returns labels and tree levels used.
  task automatic reference(input int nb, input int mode, input int base,
                           output int lab [16], output int levels);
    int L = 1 << mode, W = 32 >> mode;
    longint unsigned sum [16];
    longint unsigned rejv [16];
    int d [16];
    int st [16];   // 0 active, 1 done, 2 rejected
    int w = 1, lvl, q = 0;
    for (int k = 0; k < L; k++) begin
      sum[k] = 0;
      for (int i = 0; i < nb; i++) sum[k] += priv[(base + k*W + i) % 32];
      if (clog2w(sum[k]) > w) w = clog2w(sum[k]);
      lab[k] = 0; d[k] = 0; st[k] = 0;
      begin
        automatic int nz = 0;
        for (int i = 0; i < nb; i++) if (priv[(base + k*W + i) % 32] != 0) begin nz++; lab[k] = i; end
        if (nz < 2) st[k] = 1;        // degenerate lane: its only bin, or 0
      end
    end
    for (int k = 0; k < L; k++) rejv[k] = (64'd1 << w) - sum[k];
    levels = 0; lvl = w - 1;
    forever begin
      bit act = 0, rj = 0;
      logic [15:0] bits;
      if (q >= used.size()) break;   // the sampler stopped earlier than the model
      bits = used[q]; q++;
      levels++;
      for (int k = 0; k < L; k++) if (st[k] == 0) begin
        d[k] = 2*d[k] + (bits[k] ? 0 : 1);
        for (int i = 0; i <= nb; i++) begin
          int bitv = (i < nb) ? ((lvl < 32) ? int'(priv[(base + k*W + i) % 32][lvl]) : 0)
                              : int'(rejv[k][lvl]);
          d[k] -= bitv;
          if (d[k] < 0) begin
            if (i == nb) st[k] = 2; else begin st[k] = 1; lab[k] = i; end
            break;
          end
        end
      end
      for (int k = 0; k < L; k++) begin
        if (st[k] == 0) act = 1;
        if (st[k] == 2) rj = 1;
      end
      if (act) lvl--;
      else if (rj) begin
        lvl = w - 1;
        for (int k = 0; k < L; k++) if (st[k] == 2) begin st[k] = 0; d[k] = 0; end
      end else break;
    end
  endtask

  task automatic run(input int nb, input int mode, input int base,
                     output logic [31:0] res, output int cyc);
    cyc = 0;
    used.delete();
    cfg   = {11'd0, 5'(base), 5'd0, 3'(mode), 2'd0, 6'(nb)};
    start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1 cyc++; end
    res = result;
    @(posedge clk); #1;
  endtask

  initial begin
    logic [31:0] res;
    int cyc, levels;
    int lab [16];
    start = 0; cfg = 0; rb = 16'h0000;
    foreach (priv[i]) priv[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // ---- Example of the paper: {1,1,1}, random bits 0,0,1,0 -------------
    priv[0] = 1; priv[1] = 1; priv[2] = 1;
    rb = 16'h0;                      // first bit presented
    script.push_back(16'h0); script.push_back(16'h1); script.push_back(16'h0);
    run(3, 0, 0, res, cyc);
    check(res == 32'd1, $sformatf("example label %0d, expected 1", res));
    check(used.size() == 4, $sformatf("example used %0d levels, expected 4 (2 rejected + 2)", used.size()));
    check(cyc == 2 + 3 + 4, $sformatf("example latency %0d, expected 9", cyc));

    // ---- random distributions in every lane mode -------------------------
    for (int t = 0; t < 60; t++) begin
      automatic int mode = t % 5, L = 1 << (t % 5), W = 32 >> (t % 5);
      automatic int nb = 1 + ($urandom % W);
      automatic int base = (t < 30) ? 0 : ($urandom % 32);
      automatic int width = 1 + ($urandom % 12);
      for (int i = 0; i < 32; i++) priv[i] = ($urandom % (1 << width));
      if (t == 7) for (int i = 0; i < 32; i++) priv[i] = 32'hFFFF_0000 + i;  // wide values
      if (t == 12) for (int i = 0; i < 32; i++) priv[i] = (i % 3 == 0) ? 32'd16 : 32'd0;  // single bins
      run(nb, mode, base, res, cyc);
      reference(nb, mode, base, lab, levels);
      for (int k = 0; k < L; k++)
        check(32'(res >> (k*W)) % (W == 32 ? 33 : (1 << W)) == 32'(lab[k]) || (W == 32 && res == 32'(lab[k])),
              $sformatf("t%0d mode %0d lane %0d: got %0d expected %0d", t, mode, k, (res >> (k*W)), lab[k]));
      check(levels == used.size(), $sformatf("t%0d levels %0d vs %0d", t, levels, used.size()));
      check(cyc == 2 + L*nb + levels, $sformatf("t%0d latency %0d expected %0d", t, cyc, 2 + L*nb + levels));
    end

    // ---- histogram of {3,1,6} ---------------------------------------------
    begin
      int cnt [3];
      int n;
      real p [3];
      n = 3000;
      cnt[0] = 0; cnt[1] = 0; cnt[2] = 0;
      p[0] = 0.3; p[1] = 0.1; p[2] = 0.6;
      foreach (priv[i]) priv[i] = '0;
      priv[0] = 3; priv[1] = 1; priv[2] = 6;
      for (int s = 0; s < n; s++) begin
        run(3, 0, 0, res, cyc);
        if (res < 3) cnt[res]++;
      end
      for (int i = 0; i < 3; i++) begin
        automatic real mu = n * p[i], sd = $sqrt(n * p[i] * (1.0 - p[i]));
        check((cnt[i] > mu - 5*sd) && (cnt[i] < mu + 5*sd),
              $sformatf("histogram bin %0d: %0d draws, expected about %0.0f", i, cnt[i], mu));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
