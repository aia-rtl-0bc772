// cdc_fifo: asynchronous FIFO that carries words from one clock domain to
// another (SoC domain <-> mesh domain).
//
// Storage is a small register array written in the write clock domain and
// read combinationally in the read clock domain. Write and read pointers
// are one bit wider than the address and are passed to the other side in
// Gray code through two-flop synchronisers, so that at most one bit changes
// per transfer. The writer sees the FIFO full when the synchronised read
// pointer equals its own with the two top bits inverted; the reader sees it
// empty when the synchronised write pointer equals its own.
// Interface: valid/ready on both sides; a word is pushed when wvalid_i and
// wready_o are both high at a write-clock edge and popped when rvalid_o and
// rready_i are both high at a read-clock edge. A pushed word is visible to
// the reader after two to three read-clock edges.
// The paper says only that a cross-clock FIFO joins the SoC and the mesh
// domains; depth, Gray coding and the handshake are this design's choices.
module cdc_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             wclk_i,
  input  logic             wrst_ni,
  input  logic             wvalid_i,
  output logic             wready_o,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             rclk_i,
  input  logic             rrst_ni,
  output logic             rvalid_o,
  input  logic             rready_i,
  output logic [WIDTH-1:0] rdata_o
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] rgray_s1_q, rgray_s2_q;   // read pointer in write domain
  logic [AW:0] wgray_s1_q, wgray_s2_q;   // write pointer in read domain
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  // full: the two top Gray bits differ, the others are equal
  localparam logic [AW:0] FULL_MASK = (AW+1)'(3) << (AW - 1);
  assign wready_o = (wgray_q != (rgray_s2_q ^ FULL_MASK));
  assign wbin_n   = wbin_q + (AW+1)'(wvalid_i && wready_o);

  always_ff @(posedge wclk_i or negedge wrst_ni) begin
    if (!wrst_ni) begin
      wbin_q     <= '0;
      wgray_q    <= '0;
      rgray_s1_q <= '0;
      rgray_s2_q <= '0;
    end else begin
      wbin_q     <= wbin_n;
      wgray_q    <= bin2gray(wbin_n);
      rgray_s1_q <= rgray_q;
      rgray_s2_q <= rgray_s1_q;
    end
  end

  always_ff @(posedge wclk_i) begin
    if (wvalid_i && wready_o) mem_q[wbin_q[AW-1:0]] <= wdata_i;
  end

  // ---------------- read side ----------------
  assign rvalid_o = (rgray_q != wgray_s2_q);
  assign rdata_o  = mem_q[rbin_q[AW-1:0]];
  assign rbin_n   = rbin_q + (AW+1)'(rvalid_o && rready_i);

  always_ff @(posedge rclk_i or negedge rrst_ni) begin
    if (!rrst_ni) begin
      rbin_q     <= '0;
      rgray_q    <= '0;
      wgray_s1_q <= '0;
      wgray_s2_q <= '0;
    end else begin
      rbin_q     <= rbin_n;
      rgray_q    <= bin2gray(rbin_n);
      wgray_s1_q <= wgray_q;
      wgray_s2_q <= wgray_s1_q;
    end
  end

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("cdc_fifo: DEPTH must be a power of two >= 2");
  end

endmodule
