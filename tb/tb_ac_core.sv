// tb_ac_core: self-checking program-level test of the accelerator core.
//
// The core runs a hand-assembled program from a behavioural instruction
// memory. Its data bus sees a memory whose grant and answer are randomly
// delayed; its neighbours answer shared-RF reads with 0x1000 + dir*0x100 +
// address after random grant delays; the barrier is released 20 cycles
// after it is requested. The program exercises a branch loop, multiply,
// byte store/load, Type-0 private-register arithmetic, Type-1 reads of all
// four neighbours, the interpolation instruction, single- and two-lane
// sampling from distributions whose outcome does not depend on the random
// bits, the barrier, CSRs and EBREAK. The words it stores are compared with
// values worked out by hand.
module tb_ac_core;
  import aia_pkg::*;
  import aia_asm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        fetch_en, clk_en, halted;
  logic        ireq;
  logic [31:0] iaddr, irdata;
  mem_req_t    dreq;
  mem_rsp_t    drsp;
  logic [3:0]  nb_req, nb_gnt, nb_in_req, nb_in_gnt;
  logic [4:0]  nb_adr;
  logic [31:0] nb_data [4];
  logic [4:0]  nb_in_adr [4];
  logic [31:0] nb_in_data;
  logic        bar_req, bar_rel;

  logic [31:0] imem [1024];
  logic [31:0] dmem [1024];
  int checks = 0, failures = 0;

  ac_core #(.CORE_ID(5)) dut (
    .clk_i(clk), .rst_ni(rst_n), .fetch_en_i(fetch_en), .clk_en_i(clk_en), .halted_o(halted),
    .instr_req_o(ireq), .instr_addr_o(iaddr), .instr_rdata_i(irdata),
    .data_req_o(dreq), .data_rsp_i(drsp),
    .nb_req_o(nb_req), .nb_adr_o(nb_adr), .nb_gnt_i(nb_gnt), .nb_data_i(nb_data),
    .nb_in_req_i(nb_in_req), .nb_in_adr_i(nb_in_adr), .nb_in_gnt_o(nb_in_gnt), .nb_in_data_o(nb_in_data),
    .barrier_req_o(bar_req), .barrier_release_i(bar_rel)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // instruction memory: synchronous, holds output without a request
  always_ff @(posedge clk) if (ireq) irdata <= imem[iaddr[11:2]];

  // data memory with random grant and answer delays
  logic        pend;
  int          pdelay;
  logic [31:0] paddr;
  logic        gnt_roll;
  always_ff @(posedge clk) gnt_roll <= 1'($urandom);
  always_comb begin
    drsp.gnt    = dreq.req && !pend && gnt_roll;
    drsp.rvalid = pend && pdelay == 0;
    drsp.rdata  = dmem[paddr[11:2]];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pend <= 0; pdelay <= 0; paddr <= 0; end
    else begin
      if (drsp.rvalid) pend <= 0;
      else if (pend) pdelay <= pdelay - 1;
      if (dreq.req && drsp.gnt) begin
        pend <= 1; pdelay <= $urandom % 3; paddr <= dreq.addr;
        if (dreq.we) for (int b = 0; b < 4; b++)
          if (dreq.be[b]) dmem[dreq.addr[11:2]][b*8 +: 8] <= dreq.wdata[b*8 +: 8];
      end
    end
  end

  // neighbours
  always_comb for (int d = 0; d < 4; d++) nb_data[d] = 32'h1000 + 32'(d) * 32'h100 + 32'(nb_adr);
  always_ff @(posedge clk) nb_gnt <= 4'($urandom);
  int nb_seen [4];
  always_ff @(posedge clk) for (int d = 0; d < 4; d++) if (nb_req[d] && nb_gnt[d]) nb_seen[d]++;

  // event unit model: release 20 cycles after the request, clock gated meanwhile
  int bar_cnt = 0, bar_store_time = 0, bar_release_time = 0;
  always_ff @(posedge clk) begin
    if (bar_req && !bar_rel) bar_cnt <= bar_cnt + 1;
    if (bar_rel) bar_release_time <= $time;
    if (dreq.req && drsp.gnt && dreq.addr == 32'd56) bar_store_time <= $time;
  end
  assign bar_rel = bar_req && bar_cnt >= 20;
  assign clk_en  = !(bar_req && !bar_rel);

  initial begin
    automatic int pc = 0;
    logic [31:0] prog [$];
    int cyc;
    fetch_en = 0;
    nb_in_req = 0;
    foreach (nb_in_adr[i]) nb_in_adr[i] = 0;
    foreach (nb_seen[i]) nb_seen[i] = 0;
    foreach (dmem[i]) dmem[i] = 32'hDEAD_BEEF;
    foreach (imem[i]) imem[i] = nop();
    prog = {
      addi(1, 0, 10), addi(2, 0, 0),
      add(2, 2, 1), addi(1, 1, -1), bne(1, 0, -8),          // x2 = 55
      sw(2, 0, 0),
      lui(3, 20'h12345), addi(3, 3, 12'h678),
      mul(4, 3, 3), sw(4, 0, 4),
      mulhu(5, 3, 3), sw(5, 0, 8),
      sb(3, 0, 13), lbu(6, 0, 13), sw(6, 0, 16),
      x_large(0, 37, 3, 2),                                 // p5 = x3 + x2
      x_large(1, 7, 37, 2), sw(7, 0, 20),                   // x7 = p5 - x2
      x_nb(0, 9, 0, 5, 1), sw(9, 0, 24),                    // N
      x_nb(1, 10, 2, 7, 3), sw(10, 0, 28),                  // E
      x_nb(0, 11, 0, 1, 0), sw(11, 0, 32),                  // W
      x_nb(0, 12, 0, 2, 2), sw(12, 0, 36),                  // S
      addi(13, 0, 100), x_large(0, 32, 13, 0),
      addi(13, 0, 300), x_large(0, 33, 13, 0),
      lui(14, 20'h04000), csrrw(0, 12'h7D0, 14),            // 4 fraction bits, 32-bit entries
      addi(15, 0, 8), x_lut(16, 15), sw(16, 0, 40),         // LUT(0.5) = 200
      addi(13, 0, 8), x_large(0, 43, 13, 0),                // p11 = 8
      lui(14, 20'h00080), addi(14, 14, 4), csrrw(0, 12'h7D1, 14),   // 4 bins from p8
      x_sample(17), sw(17, 0, 44),                          // always bin 3
      addi(13, 0, 5), x_large(0, 41, 13, 0),                // p9 = 5
      addi(13, 0, 3), x_large(0, 57, 13, 0),                // p25 = 3
      lui(14, 20'h00080), addi(14, 14, 12'h102), csrrw(0, 12'h7D1, 14), // 2 lanes x 2 bins
      x_sample(18), sw(18, 0, 48),                          // 0x0001_0001
      csrrs(19, 12'hF14, 0), sw(19, 0, 52),
      x_barrier(), sw(19, 0, 56),
      ebreak()
    };
    foreach (prog[i]) imem[i] = prog[i];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 fetch_en = 1;
    cyc = 0;
    while (!halted && cyc < 5000) begin @(posedge clk); #1 cyc++; end
    check(halted, "core halts on EBREAK");
    check(dmem[0] == 32'd55, $sformatf("loop sum %0d", dmem[0]));
    check(dmem[1] == 32'h1234_5678 * 32'h1234_5678, "mul");
    check(dmem[2] == 32'((64'h1234_5678 * 64'h1234_5678) >> 32), "mulhu");
    check(dmem[3] == 32'hDEAD_78EF, $sformatf("sb into byte 1: %h", dmem[3]));
    check(dmem[4] == 32'h78, "lbu");
    check(dmem[5] == 32'h1234_5678, $sformatf("private register round trip %h", dmem[5]));
    check(dmem[6] == 32'h1105, $sformatf("north read %h", dmem[6]));
    check(dmem[7] == 32'd55 - 32'h1307, $sformatf("east read-sub %h", dmem[7]));
    check(dmem[8] == 32'h1001, "west read");
    check(dmem[9] == 32'h1202, "south read");
    check(dmem[10] == 32'd200, $sformatf("interpolation %0d", dmem[10]));
    check(dmem[11] == 32'd3, $sformatf("sample %0d", dmem[11]));
    check(dmem[12] == 32'h0001_0001, $sformatf("two-lane sample %h", dmem[12]));
    check(dmem[13] == 32'd5, "mhartid");
    check(dmem[14] == 32'd5, "store after barrier");
    check(bar_cnt >= 20 && bar_store_time > bar_release_time, "barrier held the core until release");
    for (int d = 0; d < 4; d++) check(nb_seen[d] == 1, $sformatf("neighbour %0d read once", d));
    // restart: fetch enable low clears, high runs again from address 0
    fetch_en = 0; @(posedge clk); #1;
    check(!halted, "halt cleared by fetch enable low");
    dmem[0] = 0; fetch_en = 1; cyc = 0;
    while (!halted && cyc < 5000) begin @(posedge clk); #1 cyc++; end
    check(halted && dmem[0] == 32'd55, "second run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
