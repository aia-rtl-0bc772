// interp_unit: single-cycle lookup-table interpolation unit (IU) of an accelerator core.
//
// Evaluates a non-linear function (exp, log, ...) tabulated in the private
// register file by uniform linear interpolation:
//     y = Y[i] + f * (Y[i+1] - Y[i]),   i = integer part of RS1, f = its fraction
// The fraction point of RS1 is IU.fraction (CSR 0x7D0 bits [28:24]); the
// table entry width is IU.precision (bits [6:5]): 0 = one 32-bit entry per
// register, 1 = two 16-bit entries, 2 = four 8-bit entries (entry e of a
// register occupies its bits [e*width +: width], lowest first). Entries are
// signed and sign-extended; the product f*(Y[i+1]-Y[i]) is shifted right
// arithmetically by IU.fraction, i.e. rounded towards minus infinity.
//
// Interface: the address generator drives IU.adrA / IU.adrB (private
// register holding Y[i] and Y[i+1]); the register file returns IU.dataA /
// IU.dataB combinationally and result_o is valid in the same cycle.
// Table index i wraps at the table size (32 registers).
//
// The formula, the two RF ports, the CSR address and bit fields and the
// packed 32/16/8-bit entries follow the paper; the encoding of the
// precision field, signed entries and the rounding are this design's.
module interp_unit (
  input  logic [31:0] rs1_i,
  input  logic [31:0] csr_i,
  output logic [4:0]  iu_adr_a_o,
  output logic [4:0]  iu_adr_b_o,
  input  logic [31:0] iu_data_a_i,
  input  logic [31:0] iu_data_b_i,
  output logic [31:0] result_o
);

  logic [4:0]  frac_bits;
  logic [1:0]  prec;
  logic [31:0] idx_a, idx_b, frac;
  logic signed [32:0] ya, yb;
  logic signed [65:0] prod;

  assign frac_bits = csr_i[28:24];
  assign prec      = (csr_i[6:5] == 2'd3) ? 2'd2 : csr_i[6:5];

  // address generation: floor(RS1) and floor(RS1)+1
  assign idx_a = rs1_i >> frac_bits;
  assign idx_b = idx_a + 32'd1;
  assign frac  = rs1_i & ((32'd1 << frac_bits) - 32'd1);

  assign iu_adr_a_o = 5'(idx_a >> prec);
  assign iu_adr_b_o = 5'(idx_b >> prec);

  function automatic logic signed [32:0] entry(input logic [31:0] word, input logic [1:0] p,
                                               input logic [1:0] sel);
    unique case (p)
      2'd1:    entry = 33'(signed'(word[sel[0]*16 +: 16]));
      2'd2:    entry = 33'(signed'(word[sel*8 +: 8]));
      default: entry = 33'(signed'(word));
    endcase
  endfunction

  assign ya = entry(iu_data_a_i, prec, idx_a[1:0] & ((2'd1 << prec) - 2'd1));
  assign yb = entry(iu_data_b_i, prec, idx_b[1:0] & ((2'd1 << prec) - 2'd1));

  // interpolation: the fraction is unsigned, the slope signed
  assign prod     = $signed({1'b0, frac}) * (yb - ya);
  assign result_o = 32'(ya + 33'(prod >>> frac_bits));

endmodule
