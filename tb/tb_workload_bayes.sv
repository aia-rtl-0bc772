// tb_workload_bayes: Gibbs inference in a discrete Bayes net (the five-node
// "cancer" network) on the full-size design, one independent chain per core.
//
// Nodes are Pollution P, Smoker S, Cancer C (parents P and S), Xray X and
// Dyspnoea D (children of C). The evidence is X = positive and D = true.
// Each core keeps p, s and c in registers. In every sweep it resamples P,
// then S, then C. For each node it loads the relevant entries of the
// conditional probability tables from its local data memory. It multiplies
// them into integer weights of the node's Markov blanket, writes the two
// weights into the private registers, and draws the new value with the
// sampler. The tables are probabilities quantised to 10 bits, so a weight
// is a product of at most three 10-bit numbers and stays below 2^30. Every
// core seeds its random generator with its id and counts how often each of
// P, S and C was 1. The host loads the tables, runs all 16 chains, adds up
// the counts and compares the estimated posterior marginals with the exact
// posterior of the same quantised network, found by enumerating the eight
// states of (P, S, C). The weights are exact products of the factors, so
// the chain's stationary distribution is exactly that posterior.
module tb_workload_bayes;
  import aia_pkg::*;
  import aia_asm_pkg::*;

  localparam int SWEEPS = 400;

  logic clk_soc = 1'b0, clk_mesh = 1'b0, rst_soc_n = 1'b0, rst_mesh_n = 1'b0;
  always #6 clk_soc = ~clk_soc;
  always #5 clk_mesh = ~clk_mesh;

  logic        req_valid, req_ready, rsp_valid, rsp_ready;
  host_req_t   req;
  logic [31:0] rsp;
  logic [15:0] halted;

  aia_top dut (
    .clk_soc_i(clk_soc), .rst_soc_ni(rst_soc_n), .clk_mesh_i(clk_mesh), .rst_mesh_ni(rst_mesh_n),
    .host_req_valid_i(req_valid), .host_req_ready_o(req_ready), .host_req_i(req),
    .host_rsp_valid_o(rsp_valid), .host_rsp_ready_i(rsp_ready), .host_rsp_o(rsp),
    .halted_o(halted));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic xact(input bit we, input logic [31:0] addr, input logic [31:0] wdata, output logic [31:0] rdata);
    #1 req_valid = 1; req = '{we: we, be: 4'hF, addr: addr, wdata: wdata};
    @(posedge clk_soc);
    while (!req_ready) @(posedge clk_soc);
    #1 req_valid = 0;
    while (!rsp_valid) @(posedge clk_soc);
    rdata = rsp;
    @(posedge clk_soc);
  endtask

  function automatic logic [31:0] tile(input int core, input int off);
    return 32'h1000_0000 + 32'(core) * 32'h1_0000 + 32'(off);
  endfunction

  function automatic int q(input real p);   // probability to 10-bit integer, at least 1
    automatic int v = int'(p * 1023.0);
    return (v < 1) ? 1 : v;
  endfunction

  // data memory layout (byte offsets):
  //   0x00 PP[p]          0x08 PS[s]        0x10 PC[p][s][c] at 0x10 + 16p + 8s + 4c
  //   0x30 LX[c] = P(X=pos | c)             0x38 LD[c] = P(D=true | c)
  //   0x40 sweeps         0x44/0x48/0x4C counts of P=1, S=1, C=1
  int tab [20];
  logic [31:0] prog [$];
  initial begin
    prog = {
      csrrs(1, 12'hF14, 0),
      addi(2, 1, 3), lui(3, 20'h01000), addi(3, 3, 12'h193), mul(2, 2, 3), csrrw(0, 12'h7D2, 2),
      lui(4, 20'h00100), addi(4, 4, 2), csrrw(0, 12'h7D1, 4),    // 2 bins at p16
      lw(8, 0, 12'h40), addi(10, 0, 0), addi(11, 0, 0), addi(12, 0, 0),
      addi(20, 0, 0), addi(21, 0, 0), addi(22, 0, 0),
      // ---- P | S, C: PP[l] * PC[l][s][c]
      slli(13, 11, 3), slli(14, 12, 2), add(13, 13, 14),
      lw(15, 0, 12'h00), lw(16, 13, 12'h10), mul(17, 15, 16),
      lw(15, 0, 12'h04), lw(16, 13, 12'h20), mul(18, 15, 16),
      x_large(0, 48, 17, 0), x_large(0, 49, 18, 0), x_sample(10),
      // ---- S | P, C: PS[l] * PC[p][l][c]
      slli(13, 10, 4), slli(14, 12, 2), add(13, 13, 14),
      lw(15, 0, 12'h08), lw(16, 13, 12'h10), mul(17, 15, 16),
      lw(15, 0, 12'h0C), lw(16, 13, 12'h18), mul(18, 15, 16),
      x_large(0, 48, 17, 0), x_large(0, 49, 18, 0), x_sample(11),
      // ---- C | P, S, X, D: PC[p][s][l] * LX[l] * LD[l]
      slli(13, 10, 4), slli(14, 11, 3), add(13, 13, 14),
      lw(15, 13, 12'h10), lw(16, 0, 12'h30), mul(17, 15, 16), lw(16, 0, 12'h38), mul(17, 17, 16),
      lw(15, 13, 12'h14), lw(16, 0, 12'h34), mul(18, 15, 16), lw(16, 0, 12'h3C), mul(18, 18, 16),
      x_large(0, 48, 17, 0), x_large(0, 49, 18, 0), x_sample(12),
      add(20, 20, 10), add(21, 21, 11), add(22, 22, 12),
      addi(8, 8, -1)};
    prog = {prog, bne(8, 0, (16 - prog.size()) * 4)};   // back to the P update (instruction 16)
    prog = {prog, sw(20, 0, 12'h44), sw(21, 0, 12'h48), sw(22, 0, 12'h4C), ebreak()};
  end

  initial begin
    repeat (20000000) @(posedge clk_mesh);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    real z, mp, ms, mc, wt;
    int np, ns, nc;
    req_valid = 0; req = '0; rsp_ready = 1;
    // cancer network; index 1 = high pollution / smoker / cancer
    tab[0] = q(0.9);  tab[1] = q(0.1);                    // PP
    tab[2] = q(0.7);  tab[3] = q(0.3);                    // PS (s=0 non-smoker)
    // PC[p][s][c], P(C=1 | p, s): (0,0) 0.001, (0,1) 0.03, (1,0) 0.02, (1,1) 0.05
    tab[4]  = q(0.999); tab[5]  = q(0.001);
    tab[6]  = q(0.97);  tab[7]  = q(0.03);
    tab[8]  = q(0.98);  tab[9]  = q(0.02);
    tab[10] = q(0.95);  tab[11] = q(0.05);
    tab[12] = q(0.2);   tab[13] = q(0.9);                 // LX[c] = P(X=pos | c)
    tab[14] = q(0.3);   tab[15] = q(0.65);                // LD[c] = P(D=true | c)
    tab[16] = SWEEPS;
    // exact posterior of the quantised network
    z = 0; mp = 0; ms = 0; mc = 0;
    for (int p = 0; p < 2; p++) for (int s = 0; s < 2; s++) for (int c = 0; c < 2; c++) begin
      wt = real'(tab[p]) * real'(tab[2 + s]) * real'(tab[4 + 4 * p + 2 * s + c]) * real'(tab[12 + c]) * real'(tab[14 + c]);
      z += wt;
      if (p) mp += wt;
      if (s) ms += wt;
      if (c) mc += wt;
    end
    mp /= z; ms /= z; mc /= z;

    repeat (4) @(posedge clk_soc);
    rst_soc_n = 1; rst_mesh_n = 1;
    repeat (4) @(posedge clk_soc);
    for (int core = 0; core < 16; core++) begin
      foreach (prog[i]) xact(1'b1, tile(core, i * 4), prog[i], v);
      for (int k = 0; k <= 16; k++) xact(1'b1, tile(core, 'h8000 + 4 * k), 32'(tab[k]), v);
    end
    xact(1'b1, 32'h3000_0000, 32'hFFFF, v);
    do begin
      repeat (500) @(posedge clk_soc);
      xact(1'b0, 32'h3000_0004, 0, v);
    end while (v != 32'hFFFF);
    np = 0; ns = 0; nc = 0;
    for (int core = 0; core < 16; core++) begin
      xact(1'b0, tile(core, 'h8044), 0, v); np += int'(v);
      xact(1'b0, tile(core, 'h8048), 0, v); ns += int'(v);
      xact(1'b0, tile(core, 'h804C), 0, v); nc += int'(v);
    end
    $display("P(pollution high | x, d): exact %5.3f chip %5.3f", mp, real'(np) / (16 * SWEEPS));
    $display("P(smoker | x, d):         exact %5.3f chip %5.3f", ms, real'(ns) / (16 * SWEEPS));
    $display("P(cancer | x, d):         exact %5.3f chip %5.3f", mc, real'(nc) / (16 * SWEEPS));
    check((real'(np) / (16 * SWEEPS) - mp) < 0.03 && (mp - real'(np) / (16 * SWEEPS)) < 0.03, "pollution marginal");
    check((real'(ns) / (16 * SWEEPS) - ms) < 0.03 && (ms - real'(ns) / (16 * SWEEPS)) < 0.03, "smoker marginal");
    check((real'(nc) / (16 * SWEEPS) - mc) < 0.03 && (mc - real'(nc) / (16 * SWEEPS)) < 0.03, "cancer marginal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
