// ac_regfile: enlarged 64-word register file of an accelerator core.
//
// Index 0..31 is the shared section (the architectural x0..x31, x0 reads as
// zero); index 32..63 is the private section reached only through Type-0
// Xprob instructions and by the sampler and interpolation units.
// Ports, all reads combinational and all writes on the rising clock edge:
//   * core:  two reads (ra/rb, 6-bit index) and one write (6-bit index);
//   * SU.A:  row read of private register su_adr_a (5-bit private index);
//   * SU.B:  column read; bit r of su_data_b is bit su_adr_b of private
//            register r, so one column of the Knuth-Yao matrix per read;
//   * SU write port for the sample result (wins over the core port on the
//     same index, which does not happen while the core is stalled);
//   * IU.A / IU.B: two private-register reads for the interpolation unit;
//   * neighbour port: the four neighbours (index by aia_pkg::dir_e: the side
//     the request comes from) present a read request for a shared register;
//     a fixed-priority decoder (N, S, W, E) grants one per cycle, and its
//     shared word is returned on nb_data_o to all of them.
// All registers reset to zero.
// The sizes, the split, the SU/IU/neighbour ports and the priority decoder
// follow the paper. The grant output and the priority order are this
// design's: the paper relies on the compiler to avoid two neighbours
// reading in the same cycle, and a grant lets a losing core simply wait.
module ac_regfile
  import aia_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // core
  input  logic [5:0]  ra_i,
  output logic [31:0] rdata_a_o,
  input  logic [5:0]  rb_i,
  output logic [31:0] rdata_b_o,
  input  logic        we_i,
  input  logic [5:0]  wa_i,
  input  logic [31:0] wd_i,
  // sampler
  input  logic [4:0]  su_adr_a_i,
  output logic [31:0] su_data_a_o,
  input  logic [4:0]  su_adr_b_i,
  output logic [31:0] su_data_b_o,
  input  logic        su_we_i,
  input  logic [5:0]  su_wa_i,
  input  logic [31:0] su_wd_i,
  // interpolation unit
  input  logic [4:0]  iu_adr_a_i,
  output logic [31:0] iu_data_a_o,
  input  logic [4:0]  iu_adr_b_i,
  output logic [31:0] iu_data_b_o,
  // neighbour read port of the shared section
  input  logic [3:0]  nb_req_i,
  input  logic [4:0]  nb_adr_i [4],
  output logic [3:0]  nb_gnt_o,
  output logic [31:0] nb_data_o
);

  logic [31:0] rf_q [RF_WORDS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < int'(RF_WORDS); i++) rf_q[i] <= '0;
    end else begin
      if (we_i && wa_i != 6'd0)       rf_q[wa_i]    <= wd_i;
      if (su_we_i && su_wa_i != 6'd0) rf_q[su_wa_i] <= su_wd_i;
    end
  end

  function automatic logic [31:0] rd(input logic [5:0] a);
    return (a == 6'd0) ? 32'd0 : rf_q[a];
  endfunction

  assign rdata_a_o   = rd(ra_i);
  assign rdata_b_o   = rd(rb_i);
  assign su_data_a_o = rf_q[{1'b1, su_adr_a_i}];
  assign iu_data_a_o = rf_q[{1'b1, iu_adr_a_i}];
  assign iu_data_b_o = rf_q[{1'b1, iu_adr_b_i}];

  always_comb
    for (int r = 0; r < int'(PRIV_WORDS); r++)
      su_data_b_o[r] = rf_q[SHARED_WORDS + r][su_adr_b_i];

  // priority decoder for neighbour reads: N, S, W, E
  logic [4:0] nb_sel_adr;
  always_comb begin
    nb_gnt_o   = '0;
    nb_sel_adr = '0;
    if (nb_req_i[DIR_N])      begin nb_gnt_o[DIR_N] = 1'b1; nb_sel_adr = nb_adr_i[DIR_N]; end
    else if (nb_req_i[DIR_S]) begin nb_gnt_o[DIR_S] = 1'b1; nb_sel_adr = nb_adr_i[DIR_S]; end
    else if (nb_req_i[DIR_W]) begin nb_gnt_o[DIR_W] = 1'b1; nb_sel_adr = nb_adr_i[DIR_W]; end
    else if (nb_req_i[DIR_E]) begin nb_gnt_o[DIR_E] = 1'b1; nb_sel_adr = nb_adr_i[DIR_E]; end
  end
  assign nb_data_o = rd({1'b0, nb_sel_adr});

  // the decoder selects at most one neighbour per cycle
  a_onehot_grant: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(nb_gnt_o));
  a_grant_on_request: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                       (nb_req_i != 4'd0) |-> (nb_gnt_o != 4'd0));

endmodule
