// tb_mesh_interconnect: random host transactions through the mesh-side
// host path, with four modelled tiles and a modelled global-buffer port.
//
// Tiles answer like the real tile host port (granted at once, answer next
// cycle) from their own reference arrays; the global-buffer model grants
// after a random delay and answers one cycle later. Requests arrive with
// random gaps, responses are taken with random back-pressure. Each response
// must match the reference (0 for writes and unmapped addresses) and come
// in order, the response must stay stable while not taken, only one target
// may see a request at a time, and the control registers must read back
// what was written (fetch enable) or what is driven (halted, barrier count).
module tb_mesh_interconnect;
  import aia_pkg::*;
  localparam int NC = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req_valid, req_ready, rsp_valid, rsp_ready;
  host_req_t   req;
  logic [31:0] rsp;
  mem_req_t    treq [NC];
  mem_rsp_t    trsp [NC];
  mem_req_t    gbreq;
  mem_rsp_t    gbrsp;
  logic [NC-1:0] fetch_en, halted;
  logic [31:0] bcount;
  int checks = 0, failures = 0;

  mesh_interconnect #(.NUM_CORES(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_ready_i(rsp_ready), .rsp_o(rsp),
    .tile_req_o(treq), .tile_rsp_i(trsp), .gb_req_o(gbreq), .gb_rsp_i(gbrsp),
    .fetch_en_o(fetch_en), .halted_i(halted), .barrier_count_i(bcount));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // target models: word memories of 16 words per tile (addr bit 15 + word[2:0])
  logic [31:0] tmem [NC][16];
  logic [31:0] gmem [16];
  logic [31:0] t_rd [NC], g_rd;
  logic        t_rv [NC], g_rv, groll;
  always_ff @(posedge clk) groll <= (($urandom % 3) == 0);
  always_comb begin
    for (int t = 0; t < NC; t++) begin
      trsp[t].gnt = treq[t].req; trsp[t].rvalid = t_rv[t]; trsp[t].rdata = t_rd[t];
    end
    gbrsp.gnt = gbreq.req && groll; gbrsp.rvalid = g_rv; gbrsp.rdata = g_rd;
  end
  function automatic int tw(input logic [31:0] a); return {a[15], a[4:2]}; endfunction
  always_ff @(posedge clk) begin
    for (int t = 0; t < NC; t++) begin
      t_rv[t] <= treq[t].req;
      if (treq[t].req) begin
        t_rd[t] <= tmem[t][tw(treq[t].addr)];
        if (treq[t].we) tmem[t][tw(treq[t].addr)] <= treq[t].wdata;
      end
    end
    g_rv <= gbreq.req && gbrsp.gnt;
    if (gbreq.req && gbrsp.gnt) begin
      g_rd <= gmem[gbreq.addr[5:2]];
      if (gbreq.we) gmem[gbreq.addr[5:2]] <= gbreq.wdata;
    end
  end
  // one target at a time
  always @(posedge clk) if (rst_n) begin
    automatic int n = gbreq.req;
    for (int t = 0; t < NC; t++) n += treq[t].req;
    checks++;
    if (n > 1) begin failures++; $display("FAIL: two targets requested"); end
  end

  // reference of the whole address map
  logic [31:0] rt [NC][16], rg [16];
  logic [NC-1:0] rfe;
  function automatic logic [31:0] ref_access(input host_req_t r);
    logic [31:0] old;
    old = 32'd0;
    unique case (r.addr[31:28])
      4'h1: if (int'(r.addr[19:16]) < NC) begin
        old = rt[r.addr[17:16]][tw(r.addr)];
        if (r.we) rt[r.addr[17:16]][tw(r.addr)] = r.wdata;
      end
      4'h2: begin old = rg[r.addr[5:2]]; if (r.we) rg[r.addr[5:2]] = r.wdata; end
      4'h3: begin
        unique case (r.addr[7:0])
          8'h00: begin old = 32'(rfe); if (r.we) rfe = r.wdata[NC-1:0]; end
          8'h04: old = 32'(halted);
          8'h08: old = bcount;
          default: old = 0;
        endcase
      end
      default: old = 0;
    endcase
    return r.we ? 32'd0 : old;
  endfunction

  function automatic host_req_t rand_req();
    host_req_t r;
    automatic int k = $urandom % 10;
    r.we = 1'($urandom); r.be = 4'hF; r.wdata = $urandom;
    if (k < 5)       r.addr = 32'h1000_0000 | (32'($urandom % 5) << 16) | (32'($urandom % 2) << 15) | 32'(($urandom % 8) * 4);
    else if (k < 8)  r.addr = 32'h2000_0000 | 32'(($urandom % 16) * 4);
    else if (k < 9)  r.addr = 32'h3000_0000 | 32'(($urandom % 4) * 4);
    else             r.addr = 32'h4000_0000 | 32'($urandom % 256);
    return r;
  endfunction

  logic [31:0] exp_q [$];
  int done_n = 0;
  logic [31:0] held;
  logic        was_held;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // response side
  always @(posedge clk) if (rst_n) begin
    if (was_held) begin
      checks++;
      if (!rsp_valid || rsp != held) begin failures++; $display("FAIL: response changed while held"); end
    end
    if (rsp_valid && rsp_ready) begin
      checks++;
      if (exp_q.size() == 0 || rsp != exp_q[0]) begin
        failures++;
        if (failures < 20) $display("FAIL: response %h exp %h", rsp, (exp_q.size() > 0) ? exp_q[0] : 0);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      done_n++;
      was_held <= 0;
    end else begin
      was_held <= rsp_valid;
      held <= rsp;
    end
  end

  initial begin
    req_valid = 0; req = '0; rsp_ready = 0; halted = 4'b1010; bcount = 32'd7; was_held = 0;
    for (int t = 0; t < NC; t++) for (int w = 0; w < 16; w++) begin tmem[t][w] = $urandom; rt[t][w] = tmem[t][w]; end
    for (int w = 0; w < 16; w++) begin gmem[w] = $urandom; rg[w] = gmem[w]; end
    rfe = '0;
    fork
      forever begin @(posedge clk); #1 rsp_ready = ($urandom % 3) != 0; end
    join_none
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      #1;
      req = rand_req();
      req_valid = 1;
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      exp_q.push_back(ref_access(req));
      #1 req_valid = 0;
      if (n % 500 == 250) begin halted = 4'($urandom); bcount = $urandom; end
      // the control registers sampled at issue: wait for this transaction
      // to be answered before changing inputs again
      while (done_n <= n) @(posedge clk);
      repeat ($urandom % 3) @(posedge clk);
    end
    check(fetch_en == rfe, "fetch enable register output");
    check(exp_q.size() == 0, "every transaction answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
