// tb_workload_mrf: an MRF image-denoising workload on the full-size design.
//
// Every core owns one pixel of a 4 x 4 binary image. The Markov random field
// has an energy of 1 for each pair of 4-neighbours with different labels and
// H = 2 for each pixel whose label differs from its noisy observation e.
// Each core runs chromatic Gibbs sampling with two colours (checkerboard).
// In every sweep the cores of one colour do four steps. They read the labels
// of their four neighbours straight from the neighbours' shared registers.
// They form the two conditional energies E0 and E1. They turn them into
// integer weights 2^(8-E) with the interpolation unit (a table in the
// private registers). They then draw the new label with the sampler. A
// barrier separates the two colours. Each core counts how often its label
// was 1. The labels are kept as label+1 in x5, so that a read past the mesh
// edge (which returns 0) counts as no neighbour.
// Because the weights are exact powers of two, the chain's stationary
// distribution is exactly P(x) ~ 2^-energy(x). The testbench enumerates all
// 2^16 images to get the exact marginals. It then checks the marginals the
// chip estimated against them, and checks the barrier count.
module tb_workload_mrf;
  import aia_pkg::*;
  import aia_asm_pkg::*;

  localparam int SWEEPS = 400;
  localparam int H = 2;

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

  // one transaction at a time through the cross-clock FIFOs
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

  logic [31:0] prog [$], samp [$];
  initial begin
    automatic int loop_at, skip;
    samp = {
      x_nb(0, 10, 0, 5, 0), x_nb(0, 11, 0, 5, 1), x_nb(0, 12, 0, 5, 2), x_nb(0, 13, 0, 5, 3),
      addi(16, 0, 0), addi(17, 0, 0)
    };
    for (int v = 10; v <= 13; v++)
      samp = {samp,
        i_type(2, v, 4, 18, 7'h13), sltu(18, 0, 18), add(16, 16, 18),   // x16 += (v != 2)
        i_type(1, v, 4, 18, 7'h13), sltu(18, 0, 18), add(17, 17, 18)};  // x17 += (v != 1)
    samp = {samp,
      slli(19, 6, 1),                                        // H*e
      addi(20, 0, 4), sub(20, 20, 16), add(20, 20, 19),      // E0 = #(v==2) + H*e
      addi(21, 0, 4 + H), sub(21, 21, 17), sub(21, 21, 19),  // E1 = #(v==1) + H*(1-e)
      x_lut(22, 20), x_lut(23, 21),                          // weights 2^(8-E)
      x_large(0, 48, 22, 0), x_large(0, 49, 23, 0),          // p16, p17
      x_sample(24), addi(5, 24, 1)};
    skip = (samp.size() + 1) * 4;   // from the branch to the barrier
    prog = {
      csrrs(1, 12'hF14, 0),
      addi(2, 1, 7), lui(3, 20'h01000), addi(3, 3, 12'h193), mul(2, 2, 3), csrrw(0, 12'h7D2, 2),
      csrrw(0, 12'h7D0, 0),                                  // LUT: integer index, 32-bit entries
      lui(4, 20'h00100), addi(4, 4, 2), csrrw(0, 12'h7D1, 4), // sampler: 2 bins at p16
      addi(25, 0, 256)};
    for (int k = 0; k <= 8; k++) prog = {prog, x_large(0, 32 + k, 25, 0), srli(25, 25, 1)};
    prog = {prog,
      srli(26, 1, 2), andi(27, 1, 3), add(7, 26, 27), andi(7, 7, 1),   // colour
      lw(6, 0, 0), lw(8, 0, 4), addi(5, 6, 1), addi(9, 0, 0),
      x_barrier()};
    loop_at = prog.size();
    prog = {prog, bne(7, 0, skip)};
    prog = {prog, samp};
    prog = {prog, x_barrier(), addi(28, 0, 1), bne(7, 28, skip)};
    prog = {prog, samp};
    prog = {prog, x_barrier(),
      add(9, 9, 5), addi(9, 9, -1),
      addi(8, 8, -1)};
    prog = {prog, bne(8, 0, (loop_at - prog.size()) * 4)};
    prog = {prog, sw(9, 0, 8), ebreak()};
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
    bit e [16];
    real z, pm [16], est, err, sum_err;
    req_valid = 0; req = '0; rsp_ready = 1;
    for (int i = 0; i < 16; i++) e[i] = 1'($urandom);
    // exact marginals by enumeration
    z = 0.0;
    foreach (pm[i]) pm[i] = 0.0;
    for (int x = 0; x < 65536; x++) begin
      automatic int en = 0;
      automatic real wt;
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
        automatic int i = r * 4 + c;
        if (c < 3 && x[i] != x[i + 1]) en++;
        if (r < 3 && x[i] != x[i + 4]) en++;
        if (x[i] != e[i]) en += H;
      end
      wt = 2.0 ** (-en);
      z += wt;
      for (int i = 0; i < 16; i++) if (x[i]) pm[i] += wt;
    end
    foreach (pm[i]) pm[i] = pm[i] / z;

    repeat (4) @(posedge clk_soc);
    rst_soc_n = 1; rst_mesh_n = 1;
    repeat (4) @(posedge clk_soc);
    for (int core = 0; core < 16; core++) begin
      foreach (prog[i]) xact(1'b1, tile(core, i * 4), prog[i], v);
      xact(1'b1, tile(core, 'h8000), 32'(e[core]), v);
      xact(1'b1, tile(core, 'h8004), SWEEPS, v);
    end
    xact(1'b1, 32'h3000_0000, 32'hFFFF, v);
    do begin
      repeat (500) @(posedge clk_soc);
      xact(1'b0, 32'h3000_0004, 0, v);
    end while (v != 32'hFFFF);
    xact(1'b0, 32'h3000_0008, 0, v);
    check(v == 32'(1 + 2 * SWEEPS), $sformatf("barrier count %0d", v));
    sum_err = 0.0;
    for (int i = 0; i < 16; i++) begin
      xact(1'b0, tile(i, 'h8008), 0, v);
      est = real'(v) / SWEEPS;
      err = (est > pm[i]) ? est - pm[i] : pm[i] - est;
      sum_err += err;
      $display("pixel %2d e=%0d exact P(1)=%5.3f chip %5.3f", i, e[i], pm[i], est);
      check(err < 0.15, $sformatf("pixel %0d marginal", i));
    end
    check(sum_err / 16 < 0.06, $sformatf("mean marginal error %f", sum_err / 16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
