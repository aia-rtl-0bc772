// tb_aia_mesh: the mesh at a non-square reduced size (2 rows x 3 columns,
// small memories, 4-bank global buffer), driven directly through its
// transaction stream without the cross-clock FIFOs.
//
// The same short program runs on every core: it puts 0x100*id + 0x55 into
// shared register x5, waits id*4 cycles, enters the barrier, reads x5 of its
// W, N, S and E neighbours, writes the global buffer (row 0 only reaches it)
// and halts. The test checks the neighbour wiring for every core and side
// (0 at the edge), the halted and barrier-count registers, the global-buffer
// contents and that cores outside row 0 read 0 from it. It also checks that
// the barrier gated clocks (clk_en low) while cores waited.
module tb_aia_mesh;
  import aia_pkg::*;
  import aia_asm_pkg::*;
  localparam int R = 2, C = 3, N = R * C;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req_valid, req_ready, rsp_valid, rsp_ready;
  host_req_t   req;
  logic [31:0] rsp;
  logic [N-1:0] halted;
  int checks = 0, failures = 0, gated = 0;

  aia_mesh #(.ROWS(R), .COLS(C), .IMEM_WORDS(256), .DMEM_WORDS(256), .GB_BANKS(4), .GB_BANK_BYTES(256)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp), .halted_o(halted));

  always @(posedge clk) if (rst_n && dut.clk_en != '1) gated++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic xact(input bit we, input logic [31:0] addr, input logic [31:0] wdata, output logic [31:0] rdata);
    #1 req_valid = 1; req = '{we: we, be: 4'hF, addr: addr, wdata: wdata};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0; rsp_ready = 1;
    @(posedge clk);
    while (!rsp_valid) @(posedge clk);
    rdata = rsp;
    #1 rsp_ready = 0;
  endtask

  function automatic logic [31:0] x5_of(input int r, input int c);
    if (r < 0 || r >= R || c < 0 || c >= C) return 32'd0;
    return 32'((r * C + c) * 256 + 'h55);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] prog [$];
    logic [31:0] v;
    req_valid = 0; req = '0; rsp_ready = 0;
    prog = {
      csrrs(1, 12'hF14, 0), slli(5, 1, 8), addi(5, 5, 12'h055),
      slli(6, 1, 2), addi(6, 6, 1), addi(6, 6, -1), bne(6, 0, -4),
      x_barrier(),
      x_nb(0, 9, 0, 5, 0), x_nb(0, 10, 0, 5, 1), x_nb(0, 11, 0, 5, 2), x_nb(0, 12, 0, 5, 3),
      sw(9, 0, 0), sw(10, 0, 4), sw(11, 0, 8), sw(12, 0, 12),
      lui(21, 20'h20000), slli(22, 1, 2), add(21, 21, 22), sw(5, 21, 0), lw(23, 21, 0), sw(23, 0, 16),
      ebreak()
    };
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) foreach (prog[k]) xact(1'b1, 32'h1000_0000 + 32'(i << 16) + 32'(k * 4), prog[k], v);
    xact(1'b1, 32'h3000_0000, 32'((1 << N) - 1), v);
    check(v == 0, "write answered with 0");
    for (int n = 0; n < 200; n++) begin
      xact(1'b0, 32'h3000_0004, 0, v);
      if (v == 32'((1 << N) - 1)) break;
    end
    check(v == 32'((1 << N) - 1), "all halted");
    xact(1'b0, 32'h3000_0008, 0, v);
    check(v == 1, "one barrier");
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      automatic int i = r * C + c;
      automatic logic [31:0] base = 32'h1000_8000 + 32'(i << 16);
      xact(1'b0, base + 0, 0, v);  check(v == x5_of(r, c - 1), $sformatf("core %0d W %h", i, v));
      xact(1'b0, base + 4, 0, v);  check(v == x5_of(r - 1, c), $sformatf("core %0d N %h", i, v));
      xact(1'b0, base + 8, 0, v);  check(v == x5_of(r + 1, c), $sformatf("core %0d S %h", i, v));
      xact(1'b0, base + 12, 0, v); check(v == x5_of(r, c + 1), $sformatf("core %0d E %h", i, v));
      xact(1'b0, base + 16, 0, v); check(v == ((r == 0) ? x5_of(r, c) : 32'd0), $sformatf("core %0d gb %h", i, v));
      xact(1'b0, 32'h2000_0000 + 32'(i * 4), 0, v);
      if (r == 0) check(v == x5_of(r, c), $sformatf("gb word %0d %h", i, v));
    end
    check(gated > 0, "barrier gated clocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
