// tb_aia_top: end-to-end test of the accelerator at its full default size
// (4 x 4 cores, full memories, 16-bank global buffer), driven only through
// the SoC-side host port, in two unrelated clocks.
//
// The host writes one program into all 16 instruction memories, starts all
// cores, polls the halted register, reads the barrier count and the words
// each core stored, and checks them against values worked out here. The
// program, the same on every core (it branches on its core id):
//   - seeds its random-bit generator with a core-specific value and puts
//     0x100*id + 0x55 into shared register x5;
//   - waits id*8 cycles and enters a barrier (cores wait on each other);
//   - reads one neighbour's x5 chosen so that two cores read the same
//     target at once (columns 0,1 read east, 2,3 read west): contention;
//   - top-row cores write x5 to the same global-buffer bank at once
//     (bank conflict) and read it back; other rows have no path, read 0;
//   - reads x5 of its W, N, S and E neighbours (0 at the mesh edge);
//   - moves a value through a private register (Type-0 instruction);
//   - interpolates a two-entry table at fraction id/16;
//   - draws 32 samples from the distribution {1,1,1}, whose rejection
//     probability is 1/4 per walk;
//   - enters a second barrier and halts.
// Monitors count every mechanism: host FIFO back-pressure, barrier stalls
// (gated clock), neighbour reads per direction, neighbour contention,
// global-buffer conflicts, sampler rejections and re-walks. A mechanism that
// never happens counts as a failure. The sample histogram must be close to
// uniform over {0,1,2} and the cores must produce different sequences.
module tb_aia_top;
  import aia_pkg::*;
  import aia_asm_pkg::*;

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

  // ---------------- host transaction layer ----------------
  int sent = 0, received = 0, fifo_full = 0;
  logic [31:0] rsp_log [int];

  always @(posedge clk_soc) if (rst_soc_n) begin
    if (rsp_valid && rsp_ready) begin rsp_log[received] = rsp; received++; end
    if (req_valid && !req_ready) fifo_full++;
  end

  task automatic push(input bit we, input logic [31:0] addr, input logic [31:0] wdata);
    #1;
    req_valid = 1'b1;
    req = '{we: we, be: 4'hF, addr: addr, wdata: wdata};
    @(posedge clk_soc);
    while (!req_ready) @(posedge clk_soc);
    sent++;
    #1 req_valid = 1'b0;
  endtask

  task automatic host_write(input logic [31:0] addr, input logic [31:0] data);
    push(1'b1, addr, data);
  endtask

  task automatic host_read(input logic [31:0] addr, output logic [31:0] data);
    int seq;
    seq = sent;
    push(1'b0, addr, 32'd0);
    while (received <= seq) @(posedge clk_soc);
    data = rsp_log[seq];
  endtask

  function automatic logic [31:0] tile_addr(input int core, input int off);
    return 32'h1000_0000 + 32'(core) * 32'h1_0000 + 32'(off);
  endfunction

  // ---------------- mechanism monitors (mesh clock) ----------------
  int nb_dir_cnt [4], nb_wait = 0, gb_conflict = 0, gated = 0, rejections = 0, walks = 0;
  for (genvar i = 0; i < 16; i++) begin : g_mon
    always @(posedge clk_mesh) if (rst_mesh_n) begin
      for (int d = 0; d < 4; d++) begin
        if (dut.u_mesh.nb_req[i][d] && dut.u_mesh.nb_gnt[i][d]) nb_dir_cnt[d]++;
        if (dut.u_mesh.nb_req[i][d] && !dut.u_mesh.nb_gnt[i][d]) nb_wait++;
      end
      if (!dut.u_mesh.clk_en[i]) gated++;
      // a walk of lane 0 ends on the rejection row
      if (dut.u_mesh.g_row[i/4].g_col[i%4].u_tile.u_core.u_su.state_q == 3'd3 &&
          dut.u_mesh.g_row[i/4].g_col[i%4].u_tile.u_core.u_su.lst_q[0] == 2'd0 &&
          dut.u_mesh.g_row[i/4].g_col[i%4].u_tile.u_core.u_su.hit[0] &&
          dut.u_mesh.g_row[i/4].g_col[i%4].u_tile.u_core.u_su.index[0] ==
          dut.u_mesh.g_row[i/4].g_col[i%4].u_tile.u_core.u_su.nbins_q) rejections++;
      if (dut.u_mesh.g_row[i/4].g_col[i%4].u_tile.u_core.u_su.state_q == 3'd2) walks++;
    end
  end
  for (genvar c = 0; c < 4; c++) begin : g_gbmon
    always @(posedge clk_mesh) if (rst_mesh_n)
      if (dut.u_mesh.gb_req[c].req && !dut.u_mesh.gb_rsp[c].gnt) gb_conflict++;
  end

  // ---------------- the program ----------------
  localparam int X5 = 5;
  logic [31:0] prog [$];
  initial begin
    prog = {
      csrrs(1, 12'hF14, 0),                                  // x1 = core id
      addi(2, 1, 1), lui(3, 20'h01000), addi(3, 3, 12'h193),
      mul(2, 2, 3), csrrw(0, 12'h7D2, 2),                     // seed
      slli(5, 1, 8), addi(5, 5, 12'h055),                     // x5 = 0x100*id + 0x55
      slli(6, 1, 3), addi(6, 6, 1),
      addi(6, 6, -1), bne(6, 0, -4),                          // wait id*8
      x_barrier(),
      andi(25, 1, 3), addi(26, 0, 2),
      blt(25, 26, 12),
      x_nb(0, 27, 0, X5, 0), jal(0, 8),                       // columns 2,3: west
      x_nb(0, 27, 0, X5, 3),                                  // columns 0,1: east
      sw(27, 0, 28),
      lui(21, 20'h20000), slli(22, 1, 6), add(21, 21, 22),    // 0x2000_0000 + 64*id: bank 0
      sw(5, 21, 0), lw(23, 21, 0), sw(23, 0, 24),
      x_nb(0, 9, 0, X5, 0), x_nb(0, 10, 0, X5, 1),
      x_nb(0, 11, 0, X5, 2), x_nb(0, 12, 0, X5, 3),
      sw(9, 0, 0), sw(10, 0, 4), sw(11, 0, 8), sw(12, 0, 12),
      x_large(0, 52, 5, 1), x_large(1, 13, 52, 5), sw(13, 0, 16),   // p20 = x5 + id; x13 = p20 - x5
      addi(14, 0, 100), x_large(0, 32, 14, 0),
      addi(14, 0, 300), x_large(0, 33, 14, 0),
      lui(14, 20'h04000), csrrw(0, 12'h7D0, 14),              // 4 fraction bits, 32-bit entries
      x_lut(15, 1), sw(15, 0, 20),
      addi(16, 0, 1), x_large(0, 40, 16, 0), x_large(0, 41, 16, 0), x_large(0, 42, 16, 0),
      lui(17, 20'h00080), addi(17, 17, 3), csrrw(0, 12'h7D1, 17),   // 3 bins from p8, one lane
      addi(18, 0, 32), addi(19, 0, 256),
      x_sample(20), sw(20, 19, 0), addi(19, 19, 4), addi(18, 18, -1), bne(18, 0, -16),
      x_barrier(),
      ebreak()
    };
  end

  function automatic logic [31:0] x5_of(input int r, input int c);
    if (r < 0 || r > 3 || c < 0 || c > 3) return 32'd0;
    return 32'((r * 4 + c) * 256 + 'h55);
  endfunction

  initial begin
    repeat (3000000) @(posedge clk_mesh);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    int hist [3];
    logic [31:0] seqsig [16];
    int t0;
    req_valid = 0; req = '0; rsp_ready = 1;
    foreach (nb_dir_cnt[d]) nb_dir_cnt[d] = 0;
    hist = '{0, 0, 0};
    repeat (4) @(posedge clk_soc);
    rst_soc_n = 1; rst_mesh_n = 1;
    repeat (4) @(posedge clk_soc);
    // load the program; the response side is slowed down meanwhile so
    // that both FIFOs fill up
    fork
      begin
        for (int core = 0; core < 16; core++)
          foreach (prog[i]) host_write(tile_addr(core, i * 4), prog[i]);
      end
      begin
        while (sent < 200) begin @(posedge clk_soc); #1 rsp_ready = ($urandom % 8) == 0; end
        #1 rsp_ready = 1;
      end
    join
    while (received < sent) @(posedge clk_soc);
    check(received == sent, "one response per write");
    // spot-check the instruction memories through the read path
    for (int core = 0; core < 16; core += 5) begin
      host_read(tile_addr(core, 4 * (prog.size() - 1)), v);
      check(v == prog[prog.size() - 1], $sformatf("program readback core %0d", core));
    end
    host_write(32'h3000_0000, 32'hFFFF);
    host_read(32'h3000_0000, v);
    check(v == 32'hFFFF, "fetch enable register");
    t0 = $time;
    do begin
      repeat (50) @(posedge clk_soc);
      host_read(32'h3000_0004, v);
    end while (v != 32'hFFFF && ($time - t0) < 2000000);
    check(v == 32'hFFFF, "all cores halted");
    $display("run took %0d ns", ($time - t0));
    host_read(32'h3000_0008, v);
    check(v == 32'd2, $sformatf("barrier count %0d", v));

    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
      automatic int i = r * 4 + c;
      host_read(tile_addr(i, 'h8000 + 0), v);  check(v == x5_of(r, c - 1), $sformatf("core %0d W %h", i, v));
      host_read(tile_addr(i, 'h8000 + 4), v);  check(v == x5_of(r - 1, c), $sformatf("core %0d N %h", i, v));
      host_read(tile_addr(i, 'h8000 + 8), v);  check(v == x5_of(r + 1, c), $sformatf("core %0d S %h", i, v));
      host_read(tile_addr(i, 'h8000 + 12), v); check(v == x5_of(r, c + 1), $sformatf("core %0d E %h", i, v));
      host_read(tile_addr(i, 'h8000 + 16), v); check(v == 32'(i), $sformatf("core %0d private %h", i, v));
      host_read(tile_addr(i, 'h8000 + 20), v); check(v == 32'(100 + ((i * 200) >> 4)), $sformatf("core %0d lut %0d", i, v));
      host_read(tile_addr(i, 'h8000 + 24), v); check(v == ((r == 0) ? x5_of(r, c) : 32'd0), $sformatf("core %0d gb %h", i, v));
      host_read(tile_addr(i, 'h8000 + 28), v); check(v == ((c < 2) ? x5_of(r, c + 1) : x5_of(r, c - 1)), $sformatf("core %0d contended read %h", i, v));
      seqsig[i] = '0;
      for (int k = 0; k < 32; k++) begin
        host_read(tile_addr(i, 'h8000 + 256 + 4 * k), v);
        check(v < 3, $sformatf("core %0d sample %0d = %0d", i, k, v));
        if (v < 3) hist[v]++;
        seqsig[i] = {seqsig[i][29:0], v[1:0]};
      end
    end
    // global buffer, read by the host
    for (int c = 0; c < 4; c++) begin
      host_read(32'h2000_0000 + 32'(c * 64), v);
      check(v == x5_of(0, c), $sformatf("host reads global buffer word of core %0d", c));
    end
    host_write(32'h2000_0100, 32'hCAFE_F00D);
    host_read(32'h2000_0100, v);
    check(v == 32'hCAFE_F00D, "host global buffer write/read");

    $display("histogram %0d %0d %0d", hist[0], hist[1], hist[2]);
    for (int b = 0; b < 3; b++) check(hist[b] > 120 && hist[b] < 230, $sformatf("histogram bin %0d = %0d", b, hist[b]));
    check(seqsig[0] != seqsig[1] && seqsig[1] != seqsig[2], "cores draw different sequences");

    $display("mechanisms: fifo_full=%0d gated=%0d nbW=%0d nbN=%0d nbS=%0d nbE=%0d nb_wait=%0d gb_conflict=%0d rejections=%0d walks=%0d",
             fifo_full, gated, nb_dir_cnt[0], nb_dir_cnt[1], nb_dir_cnt[2], nb_dir_cnt[3], nb_wait, gb_conflict, rejections, walks);
    check(fifo_full > 0, "host FIFO back-pressure happened");
    check(gated > 0, "barrier clock gating happened");
    for (int d = 0; d < 4; d++) check(nb_dir_cnt[d] > 0, $sformatf("neighbour reads in direction %0d", d));
    check(nb_wait > 0, "neighbour contention happened");
    check(gb_conflict > 0, "global-buffer bank conflict happened");
    check(rejections > 0, "sampler rejection happened");
    check(walks >= 16 * 32, "every sample walked the tree");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
