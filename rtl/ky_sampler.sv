// ky_sampler: rejection-based Knuth-Yao sampler unit (SU) of an accelerator core.
//
// Samples a label from a non-normalised discrete distribution {m[0..N-1]}
// held in the private register file, without dividing by the sum.
//   1. Preprocess: the rows m[i] are read one per cycle through port SU.A
//      and summed. w = ceil(log2(sum)) and rej = 2^w - sum turn the
//      distribution into {m[0..N-1], rej}, whose total is exactly 2^w.
//   2. Distance: the DDG tree of that distribution is walked one level per
//      cycle, most significant bit first. Port SU.B returns one column of
//      the binary matrix (bit j of every private register). With one random
//      bit rb per lane, d' = 2d + !rb - sum(column) (ky_decoder); the first
//      row at which the running count exceeds 2d + !rb is the leaf reached.
//   3. A leaf equal to the rejection row restarts that lane from the root
//      with d = 0 (the FSM re-samples); any other leaf is the sample.
// The 32 register rows can be split into 1, 2, 4, 8 or 16 lanes of
// 32/lanes rows, each an independent distribution of `nbins` bins, so up to
// 16 labels are drawn per instruction.
//
// Configuration (SU CSR): nbins = cfg[5:0] (1..32/lanes), lane mode =
// cfg[10:8] (log2 lanes), base = cfg[20:16] (first private register of lane
// 0; lane k row i is private register base + k*32/lanes + i, modulo 32).
// Result: the label of lane k sits in bits [k*32/lanes +: 32/lanes].
//
// Timing: start_i is taken in IDLE; then lanes*nbins preprocess cycles, one
// cycle to form w and rej, one cycle per tree level visited (rejected walks
// included), then done_o is high for one cycle with result_o: done_o comes
// 2 + lanes*nbins + levels cycles after the start_i cycle. busy_o is high from the cycle after
// start_i up to and including the done_o cycle. rb_take_o is high in every
// tree-level cycle; the random bits must be fresh in each of them.
//
// Follows the paper: the preprocess formulas, the recursion for d', the
// first-negative decoding, rejection and re-sampling, the row/column ports
// and the lane split. Choices of this design: all lanes share one w (the
// largest lane's; a larger w only raises the rejection rate of the other
// lanes and keeps sampling exact) and walk the tree in lock-step, rejected
// lanes restart together once every lane has reached a leaf, and the CSR
// layout above. A lane with at most one non-zero bin returns that bin (0 if
// all are zero) in the first tree cycle: with w = ceil(log2(sum)) a single
// bin equal to 2^w would need a tree level above w.
module ky_sampler #(
  parameter int unsigned MAX_LANES = 16,
  parameter int unsigned ROWS      = 32
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 start_i,
  input  logic [31:0]          cfg_i,      // bits other than [20:16], [10:8], [5:0] are ignored
  // SU.A: row read of the private RF
  output logic [4:0]           su_adr_a_o,
  input  logic [31:0]          su_data_a_i,
  // SU.B: column read of the private RF (bit r = bit j of private reg r)
  output logic [4:0]           su_adr_b_o,
  input  logic [31:0]          su_data_b_i,
  // random bits
  input  logic [MAX_LANES-1:0] rb_i,
  output logic                 rb_take_o,
  // status / result
  output logic                 busy_o,
  output logic                 done_o,
  output logic [31:0]          result_o
);

  typedef enum logic [2:0] { S_IDLE, S_PRE, S_WIDTH, S_DIST, S_DONE } state_e;
  typedef enum logic [1:0] { L_ACTIVE, L_DONE, L_REJ } lane_e;

  state_e           state_q;
  logic [5:0]       nbins_q;
  logic [2:0]       mode_q;
  logic [4:0]       base_q;
  logic [5:0]       row_q;        // row within lane during preprocess
  logic [3:0]       lane_q;       // lane during preprocess
  logic [36:0]      sum_q  [MAX_LANES];
  logic [1:0]       nz_q   [MAX_LANES];  // non-zero bins seen, saturating at 2
  logic [5:0]       nzi_q  [MAX_LANES];  // index of the last non-zero bin
  logic [5:0]       level_q;      // current tree level (bit position), counts down
  logic signed [7:0] d_q   [MAX_LANES];
  lane_e            lst_q  [MAX_LANES];
  logic [5:0]       lab_q  [MAX_LANES];

  logic [5:0]       lanes_m1, w_rows;
  assign lanes_m1 = 6'((1 << mode_q) - 1);
  assign w_rows   = 6'(ROWS >> mode_q);

  // ---------------- preprocess: shared precision w and rej per lane -----
  logic [5:0]  w_all;
  logic [37:0] rej [MAX_LANES];
  always_comb begin
    w_all = 6'd1;
    for (int unsigned k = 0; k < MAX_LANES; k++) begin
      logic [5:0] wk;
      wk = 6'd0;
      if (sum_q[k] > 37'd1)
        for (int unsigned b = 0; b < 37; b++)
          if (((sum_q[k] - 37'd1) >> b) != 0) wk = 6'(b + 1);
      if (k <= 32'(lanes_m1) && wk > w_all) w_all = wk;
    end
    for (int unsigned k = 0; k < MAX_LANES; k++)
      rej[k] = (38'd1 << w_all) - {1'b0, sum_q[k]};
  end

  assign su_adr_a_o = 5'(base_q + 5'(32'(lane_q) * 32'(w_rows)) + 5'(row_q));
  assign su_adr_b_o = level_q[4:0];

  // ---------------- distance + decoder -----------------------------------
  logic [ROWS-1:0]      col_rot;
  logic [MAX_LANES-1:0] rej_bit;
  logic signed [7:0]    dd     [MAX_LANES];
  logic signed [7:0]    d_next [MAX_LANES];
  logic [MAX_LANES-1:0] hit;
  logic [5:0]           index  [MAX_LANES];

  always_comb begin
    // rows relative to base; tree levels above bit 31 have zero m-bits
    for (int unsigned r = 0; r < ROWS; r++)
      col_rot[r] = (level_q < 6'd32) ? su_data_b_i[5'(base_q + 5'(r))] : 1'b0;
    for (int unsigned k = 0; k < MAX_LANES; k++) begin
      rej_bit[k] = rej[k][level_q];
      dd[k]      = (d_q[k] <<< 1) + 8'(!rb_i[k]);
    end
  end

  ky_decoder #(.ROWS(ROWS), .MAX_LANES(MAX_LANES)) u_dec (
    .mode_i   (mode_q),
    .nbins_i  (nbins_q),
    .col_i    (col_rot),
    .rej_bit_i(rej_bit),
    .dd_i     (dd),
    .d_next_o (d_next),
    .hit_o    (hit),
    .index_o  (index)
  );

  // ---------------- one step of the lock-step walk -------------------------
  lane_e             lst_n  [MAX_LANES];
  logic signed [7:0] d_n    [MAX_LANES];
  logic [5:0]        lab_n  [MAX_LANES];
  logic [MAX_LANES-1:0] lab_we;
  logic              any_active, any_rej;

  always_comb begin
    any_active = 1'b0;
    any_rej    = 1'b0;
    for (int unsigned k = 0; k < MAX_LANES; k++) begin
      lst_n[k]  = lst_q[k];
      d_n[k]    = d_q[k];
      lab_n[k]  = index[k];
      lab_we[k] = 1'b0;
      if (k > 32'(lanes_m1)) begin
        lst_n[k] = L_DONE;
      end else if (lst_q[k] == L_ACTIVE) begin
        if (nz_q[k] != 2'd2) begin
          lst_n[k]  = L_DONE;                 // zero or one non-zero bin
          lab_n[k]  = nzi_q[k];
          lab_we[k] = 1'b1;
        end else if (hit[k] && index[k] != nbins_q) begin
          lst_n[k]  = L_DONE;
          lab_we[k] = 1'b1;
        end else if (hit[k] || level_q == 6'd0) begin
          lst_n[k]  = L_REJ;                  // rejection leaf
        end else begin
          d_n[k]    = d_next[k];
        end
      end
      if (lst_n[k] == L_ACTIVE) any_active = 1'b1;
      if (lst_n[k] == L_REJ)    any_rej    = 1'b1;
    end
    // every lane reached a leaf: rejected lanes restart from the root
    if (!any_active && any_rej)
      for (int unsigned k = 0; k < MAX_LANES; k++)
        if (lst_n[k] == L_REJ) begin
          lst_n[k] = L_ACTIVE;
          d_n[k]   = '0;
        end
  end

  // ---------------- FSM ---------------------------------------------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      nbins_q <= '0;
      mode_q  <= '0;
      base_q  <= '0;
      row_q   <= '0;
      lane_q  <= '0;
      level_q <= '0;
      for (int unsigned k = 0; k < MAX_LANES; k++) begin
        sum_q[k] <= '0;
        nz_q[k]  <= '0;
        nzi_q[k] <= '0;
        d_q[k]   <= '0;
        lst_q[k] <= L_DONE;
        lab_q[k] <= '0;
      end
    end else begin
      unique case (state_q)
        S_IDLE: if (start_i) begin
          nbins_q <= (cfg_i[5:0] == 0) ? 6'd1 : cfg_i[5:0];
          mode_q  <= (cfg_i[10:8] > 3'd4) ? 3'd4 : cfg_i[10:8];
          base_q  <= cfg_i[20:16];
          row_q   <= '0;
          lane_q  <= '0;
          for (int unsigned k = 0; k < MAX_LANES; k++) begin
            sum_q[k] <= '0;
            nz_q[k]  <= '0;
            nzi_q[k] <= '0;
            d_q[k]   <= '0;
            lab_q[k] <= '0;
            lst_q[k] <= L_ACTIVE;
          end
          state_q <= S_PRE;
        end
        S_PRE: begin
          sum_q[lane_q] <= sum_q[lane_q] + 37'(su_data_a_i);
          if (su_data_a_i != '0) begin
            nzi_q[lane_q] <= row_q;
            if (nz_q[lane_q] != 2'd2) nz_q[lane_q] <= nz_q[lane_q] + 2'd1;
          end
          if (row_q == nbins_q - 6'd1) begin
            row_q <= '0;
            if (6'(lane_q) == lanes_m1) state_q <= S_WIDTH;
            lane_q <= lane_q + 4'd1;
          end else begin
            row_q <= row_q + 6'd1;
          end
        end
        S_WIDTH: begin
          // sums are final: start the walk at the top level of the shared w
          level_q <= w_all - 6'd1;
          state_q <= S_DIST;
        end
        S_DIST: begin
          if (any_active)   level_q <= level_q - 6'd1;
          else if (any_rej) level_q <= w_all - 6'd1;   // rejected lanes walk again from the root
          else              state_q <= S_DONE;
          for (int unsigned k = 0; k < MAX_LANES; k++) begin
            lst_q[k] <= lst_n[k];
            d_q[k]   <= d_n[k];
            if (lab_we[k]) lab_q[k] <= lab_n[k];
          end
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign rb_take_o = (state_q == S_DIST);
  assign busy_o    = (state_q != S_IDLE);
  assign done_o    = (state_q == S_DONE);

  always_comb begin
    result_o = '0;
    for (int unsigned k = 0; k < MAX_LANES; k++)
      if (k <= 32'(lanes_m1))
        for (int unsigned b = 0; b < 6; b++)
          if (k * 32'(w_rows) + b < 32 && b < 32'(w_rows))
            result_o[k * 32'(w_rows) + b] = lab_q[k][b];
  end

endmodule
