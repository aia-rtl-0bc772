// tb_event_unit: random test of the barrier logic.
//
// Eight cores are modelled as small state machines: each runs for a random
// number of cycles, then requests the barrier and holds the request until
// it sees release, or halts for good. The test checks every cycle that
// release is high exactly when every running core is waiting (and one is
// waiting at all), that a waiting core's clock enable is low except in the
// release cycle, that idle cores keep their clock, and that the barrier
// counter counts release cycles. Release must come in the same cycle as the
// last arrival (single-cycle barrier).
module tb_event_unit;
  localparam int N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [N-1:0] req, active, clk_en;
  logic rel;
  logic [31:0] count;
  int checks = 0, failures = 0, releases = 0, exp_count = 0;
  int run_left [N];

  event_unit #(.NUM_CORES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .barrier_req_i(req),
    .core_active_i(active), .release_o(rel), .clk_en_o(clk_en), .barrier_count_o(count));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; active = '1;
    for (int i = 0; i < N; i++) run_left[i] = $urandom % 20;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      #1;
      begin
        automatic bit all = 1'b1;
        for (int i = 0; i < N; i++) if (active[i] && !req[i]) all = 1'b0;
        all = all && (req != 0);
        check(rel == all, $sformatf("release cyc=%0d req=%b act=%b", cyc, req, active));
        for (int i = 0; i < N; i++)
          check(clk_en[i] == !(req[i] && !all), "clock enable");
        check(count == 32'(exp_count), "barrier count");
        if (all) begin exp_count++; releases++; end
      end
      @(posedge clk);
      #1;
      // update core models after the edge
      for (int i = 0; i < N; i++) begin
        if (req[i] && rel) begin
          req[i] = 1'b0; run_left[i] = $urandom % 20;
        end else if (!req[i] && active[i]) begin
          if (run_left[i] == 0) begin
            if ($urandom % 200 == 0) active[i] = 1'b0; else req[i] = 1'b1;
          end else run_left[i]--;
        end
      end
      if (cyc % 4000 == 3999) active = '1;
    end
    check(releases > 100, "enough barriers");
    $display("releases=%0d", releases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
