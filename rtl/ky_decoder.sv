// ky_decoder: reconfigurable distance/decoder stage of the Knuth-Yao sampler.
//
// One column of the DDG probability matrix is presented per cycle: bit r of
// `col` is the tree-level bit of row r, and the 32 rows are split into
// 1, 2, 4, 8 or 16 lanes of 32, 16, 8, 4 or 2 rows (mode = log2 of the lane
// count). Within lane k the rows are ordered m[0] .. m[nbins-1] followed by
// the lane's rejection row (rej_bit[k]) at index nbins; rows past nbins count
// as zero. For each lane, given dd = 2d + !rb (the distance after shifting in
// the random bit), the stage returns
//   d_next = dd - sum(column bits of the lane)      (the d' of the paper)
//   hit    = d_next < 0                             (a leaf was reached)
//   index  = first row whose running bit count exceeds dd
// index == nbins means the rejection leaf was hit. The paper specifies the
// formula d' = 2d + !rb - sum n[i], the first-negative rule, the lane split
// and a parallel-prefix adder; here the running count is written as a
// simple chain and left to synthesis to restructure. Purely combinational.
module ky_decoder #(
  parameter int unsigned ROWS      = 32,
  parameter int unsigned MAX_LANES = 16
) (
  input  logic [2:0]                  mode_i,     // log2(lanes), 0..4
  input  logic [5:0]                  nbins_i,    // bins per lane, 1..rows per lane
  input  logic [ROWS-1:0]             col_i,
  input  logic [MAX_LANES-1:0]        rej_bit_i,
  input  logic signed [7:0]           dd_i     [MAX_LANES],
  output logic signed [7:0]           d_next_o [MAX_LANES],
  output logic [MAX_LANES-1:0]        hit_o,
  output logic [5:0]                  index_o  [MAX_LANES]
);

  always_comb begin
    int unsigned lanes, w;
    lanes = 1 << mode_i;
    w     = ROWS >> mode_i;
    for (int unsigned k = 0; k < MAX_LANES; k++) begin
      logic signed [7:0] cnt;
      logic              found;
      logic [5:0]        idx;
      logic              b;
      cnt   = '0;
      found = 1'b0;
      idx   = '0;
      for (int unsigned p = 0; p <= ROWS; p++) begin
        if (p < 32'(nbins_i) && p < w && k < lanes) b = col_i[k*w + p];
        else if (p == 32'(nbins_i) && k < lanes)    b = rej_bit_i[k];
        else                                        b = 1'b0;
        cnt = cnt + 8'(b);
        if (!found && b && (cnt > dd_i[k])) begin
          found = 1'b1;
          idx   = 6'(p);
        end
      end
      d_next_o[k] = dd_i[k] - cnt;
      hit_o[k]    = (k < lanes) && (d_next_o[k] < 0);
      index_o[k]  = idx;
    end
  end

endmodule
