// tb_ac_tile: two tiles, one with a global-buffer port (HAS_GB=1) and one
// without, run the same program loaded through their host ports.
//
// The host port writes the program into the instruction memory and data
// into the scratchpad, checks that every host access is answered one cycle
// later, starts the cores and reads back the words the program stored. The
// global-buffer port of the first tile is served by a memory model with
// random grant and answer delays. The program copies scratchpad data,
// writes and reads the global buffer, reads neighbour registers (the ports
// answer with fixed values) and halts. The tile without the port must read
// 0 from the global buffer and drop its write. The two tiles differ in core
// id, so their mhartid readback differs too.
module tb_ac_tile;
  import aia_pkg::*;
  import aia_asm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       fetch_en;
  logic [1:0] halted, bar_req;
  mem_req_t   hreq [2], gbreq [2];
  mem_rsp_t   hrsp [2], gbrsp [2];
  logic [3:0] nb_req [2], nb_gnt, in_gnt [2];
  logic [4:0] nb_adr [2], in_adr [4];
  logic [31:0] nb_data [4], in_data [2];
  int checks = 0, failures = 0, gb_accesses = 0;

  for (genvar t = 0; t < 2; t++) begin : g_t
    ac_tile #(.CORE_ID(t + 6), .HAS_GB(t == 0), .IMEM_WORDS(256), .DMEM_WORDS(512)) dut (
      .clk_i(clk), .rst_ni(rst_n), .fetch_en_i(fetch_en), .clk_en_i(1'b1), .halted_o(halted[t]),
      .host_req_i(hreq[t]), .host_rsp_o(hrsp[t]), .gb_req_o(gbreq[t]), .gb_rsp_i(gbrsp[t]),
      .nb_req_o(nb_req[t]), .nb_adr_o(nb_adr[t]), .nb_gnt_i(nb_gnt), .nb_data_i(nb_data),
      .nb_in_req_i(4'b0), .nb_in_adr_i(in_adr), .nb_in_gnt_o(in_gnt[t]), .nb_in_data_o(in_data[t]),
      .barrier_req_o(bar_req[t]), .barrier_release_i(bar_req[t]));
  end
  assign nb_gnt = 4'hF;
  always_comb for (int d = 0; d < 4; d++) begin nb_data[d] = 32'hA000 + 32'(d); in_adr[d] = '0; end
  assign gbrsp[1] = '0;

  // global buffer model for tile 0
  logic [31:0] gbmem [64];
  logic        gpend, groll;
  int          gdelay;
  logic [31:0] gaddr;
  always_ff @(posedge clk) groll <= 1'($urandom);
  always_comb begin
    gbrsp[0].gnt    = gbreq[0].req && !gpend && groll;
    gbrsp[0].rvalid = gpend && gdelay == 0;
    gbrsp[0].rdata  = gbmem[gaddr[7:2]];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin gpend <= 0; gdelay <= 0; gaddr <= 0; end
    else begin
      if (gbrsp[0].rvalid) gpend <= 0;
      else if (gpend) gdelay <= gdelay - 1;
      if (gbreq[0].req && gbrsp[0].gnt) begin
        gpend <= 1; gdelay <= $urandom % 3; gaddr <= gbreq[0].addr; gb_accesses++;
        if (gbreq[0].we) gbmem[gbreq[0].addr[7:2]] <= gbreq[0].wdata;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic host(input int t, input bit we, input logic [31:0] addr, input logic [31:0] wdata,
                      output logic [31:0] rdata);
    #1;
    hreq[t] = '{req: 1'b1, we: we, be: 4'hF, addr: addr, wdata: wdata};
    #1 check(hrsp[t].gnt, "host port granted at once");
    @(posedge clk); #1;
    hreq[t] = '0;
    check(hrsp[t].rvalid, "host answer one cycle later");
    rdata = hrsp[t].rdata;
    @(posedge clk);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] prog [$];
    logic [31:0] v;
    fetch_en = 0; hreq[0] = '0; hreq[1] = '0;
    foreach (gbmem[i]) gbmem[i] = 32'h5555_0000 + 32'(i);
    prog = {
      lw(1, 0, 12'h100), addi(1, 1, 1), sw(1, 0, 0),          // scratchpad copy + 1
      csrrs(2, 12'hF14, 0), sw(2, 0, 4),
      lui(3, 20'h20000), sw(2, 3, 8), lw(4, 3, 8), sw(4, 0, 8),   // global buffer word 2
      lw(5, 3, 12), sw(5, 0, 12),                            // global buffer word 3
      x_nb(0, 6, 0, 3, 1), sw(6, 0, 16),                     // north neighbour
      x_barrier(), ebreak()
    };
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      foreach (prog[i]) host(t, 1'b1, 32'(i * 4), prog[i], v);
      host(t, 1'b1, 32'h8100, 32'h1234_0000 + 32'(t), v);
      foreach (prog[i]) begin
        host(t, 1'b0, 32'(i * 4), 0, v);
        check(v == prog[i], "instruction memory readback");
      end
      host(t, 1'b0, 32'h8100, 0, v);
      check(v == 32'h1234_0000 + 32'(t), "scratchpad readback");
    end
    @(posedge clk); #1 fetch_en = 1;
    for (int n = 0; n < 2000 && halted != 2'b11; n++) @(posedge clk);
    check(halted == 2'b11, "both cores halted");
    #1 fetch_en = 0;
    for (int t = 0; t < 2; t++) begin
      host(t, 1'b0, 32'h8000, 0, v); check(v == 32'h1234_0001 + 32'(t), $sformatf("t%0d copy %h", t, v));
      host(t, 1'b0, 32'h8004, 0, v); check(v == 32'(t + 6), $sformatf("t%0d id %h", t, v));
      host(t, 1'b0, 32'h8008, 0, v); check(v == ((t == 0) ? 32'd6 : 32'd0), $sformatf("t%0d gb rw %h", t, v));
      host(t, 1'b0, 32'h800C, 0, v); check(v == ((t == 0) ? 32'h5555_0003 : 32'd0), $sformatf("t%0d gb read %h", t, v));
      host(t, 1'b0, 32'h8010, 0, v); check(v == 32'hA001, $sformatf("t%0d north %h", t, v));
    end
    check(gbmem[2] == 32'd6, "global buffer written by tile 0 only");
    check(gb_accesses == 3, $sformatf("global buffer accesses %0d", gb_accesses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
