// event_unit: global barrier and clock gating of the accelerator cores.
//
// A core that reaches a barrier instruction raises its barrier request and
// waits. An AND tree over all cores decides in the same cycle whether every
// core has arrived; a core that is not running (fetch disabled or halted)
// counts as arrived. When the tree is true, release_o is high for that
// cycle and every waiting core completes its barrier together:
// synchronisation takes a single cycle. While a core waits and the barrier
// is not yet released its clock enable is low, which stands for the gated
// clock of the chip. barrier_count_o counts completed barriers (wrapping)
// and is readable by the host.
// Follows the paper: the AND tree, the single-cycle release broadcast and
// clock gating during the wait. This design's: the idle-core rule, the
// counter, and gating by an enable rather than a clock-gate cell.
module event_unit #(
  parameter int unsigned NUM_CORES = 16
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [NUM_CORES-1:0] barrier_req_i,
  input  logic [NUM_CORES-1:0] core_active_i,
  output logic               release_o,
  output logic [NUM_CORES-1:0] clk_en_o,
  output logic [31:0]        barrier_count_o
);

  logic [NUM_CORES-1:0] arrived;
  assign arrived   = barrier_req_i | ~core_active_i;
  assign release_o = (&arrived) && (|barrier_req_i);
  assign clk_en_o  = ~(barrier_req_i & {NUM_CORES{!release_o}});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        barrier_count_o <= '0;
    else if (release_o) barrier_count_o <= barrier_count_o + 32'd1;
  end

endmodule
