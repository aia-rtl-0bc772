// lfsr_rng: random-bit source of the Knuth-Yao sampler.
//
// A 32-bit Fibonacci LFSR with the maximal-length polynomial
// x^32 + x^22 + x^2 + x + 1. Each sampler lane needs one fresh random bit
// per decision-tree level, and up to OUT_BITS lanes run in parallel, so one
// `step` advances the register by OUT_BITS single-bit shifts at once and
// rb presents the low OUT_BITS bits of the current state (lane k uses
// rb[k]). The register is the small buffer between the generator and the
// distance logic: its bits stay stable until the sampler consumes them.
//
// Interface: seed_we loads `seed` (an all-zero seed is replaced by
// 32'h1 so the register never locks up); step advances on the next clock
// edge; seed_we wins over step. Reset value 32'hACE1_2024.
// The paper names an LFSR as the random source; its width, polynomial,
// seeding and reset value are this design's choices.
module lfsr_rng #(
  parameter int unsigned OUT_BITS = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                seed_we_i,
  input  logic [31:0]         seed_i,
  input  logic                step_i,
  output logic [OUT_BITS-1:0] rb_o
);

  localparam logic [31:0] RESET_STATE = 32'hACE1_2024;

  logic [31:0] state_q, state_adv;

  // OUT_BITS single-bit shifts of the Fibonacci register.
  always_comb begin
    state_adv = state_q;
    for (int unsigned i = 0; i < OUT_BITS; i++) begin
      state_adv = {state_adv[30:0], state_adv[31] ^ state_adv[21] ^ state_adv[1] ^ state_adv[0]};
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        state_q <= RESET_STATE;
    else if (seed_we_i) state_q <= (seed_i == '0) ? 32'h1 : seed_i;
    else if (step_i)    state_q <= state_adv;
  end

  assign rb_o = state_q[OUT_BITS-1:0];

endmodule
