// tb_cdc_fifo: two unrelated clocks (periods 7 and 13 time units, then
// swapped roles in a second instance) pass a numbered random sequence
// through the FIFO with random valid and ready. Every popped word must be
// the next one pushed (no loss, no duplicate, order kept); the writer must
// see the FIFO full at some point and the reader empty; the data must be
// stable while valid is held without ready.
module tb_cdc_fifo;
  localparam int DEPTH = 4;
  localparam int NWORDS = 3000;
  logic wclk = 1'b0, rclk = 1'b0, wrst_n = 1'b0, rrst_n = 1'b0;
  always #7 wclk = ~wclk;
  always #13 rclk = ~rclk;
  logic wvalid, wready, rvalid, rready;
  logic [15:0] wdata, rdata;
  int checks = 0, failures = 0, sent = 0, got = 0, full_seen = 0;
  logic [15:0] seq [NWORDS];

  cdc_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (
    .wclk_i(wclk), .wrst_ni(wrst_n), .wvalid_i(wvalid), .wready_o(wready), .wdata_i(wdata),
    .rclk_i(rclk), .rrst_ni(rrst_n), .rvalid_o(rvalid), .rready_i(rready), .rdata_o(rdata));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial for (int i = 0; i < NWORDS; i++) seq[i] = 16'($urandom);

  // writer
  initial begin
    wvalid = 0; wdata = 0;
    repeat (3) @(posedge wclk);
    wrst_n = 1;
    while (sent < NWORDS) begin
      #1;
      // burst phases: fast writer for the first half, slow later
      wvalid = (sent < NWORDS / 2) ? 1'b1 : (($urandom % 4) == 0);
      wdata  = seq[sent];
      @(posedge wclk);
      if (wvalid && wready) sent++;
      if (wvalid && !wready) full_seen++;
    end
    #1 wvalid = 0;
  end

  // reader
  logic        held;
  logic [15:0] held_data;
  initial begin
    rready = 0; held = 0;
    repeat (3) @(posedge rclk);
    rrst_n = 1;
    while (got < NWORDS) begin
      #1;
      rready = (got < NWORDS / 2) ? (($urandom % 3) == 0) : 1'b1;
      #1;
      if (held && rvalid) begin
        checks++;
        if (rdata !== held_data) begin failures++; $display("FAIL: data changed while held"); end
      end
      @(posedge rclk);
      if (rvalid && rready) begin
        checks++;
        if (rdata !== seq[got]) begin
          failures++;
          if (failures < 10) $display("FAIL: word %0d got %h exp %h", got, rdata, seq[got]);
        end
        got++;
        held = 0;
      end else begin
        held = rvalid; held_data = rdata;
      end
    end
    repeat (10) @(posedge rclk);
    checks++;
    if (rvalid) begin failures++; $display("FAIL: extra word"); end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL: FIFO never full"); end
    $display("full cycles=%0d", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
