// tb_ac_regfile: self-checking test of the enlarged register file.
//
// Random writes through the core and sampler ports are mirrored in a model
// array; every cycle all read ports (core, SU row, SU column, IU, neighbour)
// are compared with the model. Neighbour requests are random, so the
// priority order N > S > W > E and the zero index are exercised.
module tb_ac_regfile;
  import aia_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [5:0]  ra, rb, wa, su_wa;
  logic [31:0] rda, rdb, wd, su_wd, su_da, su_db, iu_da, iu_db, nb_data;
  logic        we, su_we;
  logic [4:0]  su_aa, su_ab, iu_aa, iu_ab;
  logic [3:0]  nb_req, nb_gnt;
  logic [4:0]  nb_adr [4];
  logic [31:0] model [64];
  int checks = 0, failures = 0;

  ac_regfile dut (
    .clk_i(clk), .rst_ni(rst_n), .ra_i(ra), .rdata_a_o(rda), .rb_i(rb), .rdata_b_o(rdb),
    .we_i(we), .wa_i(wa), .wd_i(wd), .su_adr_a_i(su_aa), .su_data_a_o(su_da),
    .su_adr_b_i(su_ab), .su_data_b_o(su_db), .su_we_i(su_we), .su_wa_i(su_wa), .su_wd_i(su_wd),
    .iu_adr_a_i(iu_aa), .iu_data_a_o(iu_da), .iu_adr_b_i(iu_ab), .iu_data_b_o(iu_db),
    .nb_req_i(nb_req), .nb_adr_i(nb_adr), .nb_gnt_o(nb_gnt), .nb_data_o(nb_data)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (model[i]) model[i] = '0;
    we = 0; su_we = 0; ra = 0; rb = 0; wa = 0; wd = 0; su_wa = 0; su_wd = 0;
    su_aa = 0; su_ab = 0; iu_aa = 0; iu_ab = 0; nb_req = 0;
    foreach (nb_adr[i]) nb_adr[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      automatic logic [31:0] col;
      automatic int sel;
      ra = 6'($urandom); rb = 6'($urandom);
      su_aa = 5'($urandom); su_ab = 5'($urandom); iu_aa = 5'($urandom); iu_ab = 5'($urandom);
      nb_req = 4'($urandom);
      foreach (nb_adr[i]) nb_adr[i] = 5'($urandom);
      we = 1'($urandom); wa = 6'($urandom); wd = $urandom;
      su_we = ($urandom % 4 == 0); su_wa = 6'($urandom); su_wd = $urandom;
      #1;
      check(rda == ((ra == 0) ? 0 : model[ra]), "core read A");
      check(rdb == ((rb == 0) ? 0 : model[rb]), "core read B");
      check(su_da == model[32 + su_aa], "SU.A row read");
      for (int r = 0; r < 32; r++) col[r] = model[32 + r][su_ab];
      check(su_db == col, "SU.B column read");
      check(iu_da == model[32 + iu_aa] && iu_db == model[32 + iu_ab], "IU reads");
      sel = nb_req[DIR_N] ? DIR_N : nb_req[DIR_S] ? DIR_S : nb_req[DIR_W] ? DIR_W :
            nb_req[DIR_E] ? DIR_E : -1;
      if (sel < 0) check(nb_gnt == 0, "no grant without request");
      else begin
        check(nb_gnt == 4'(1 << sel), $sformatf("grant %b for requests %b", nb_gnt, nb_req));
        check(nb_data == ((nb_adr[sel] == 0) ? 0 : model[nb_adr[sel]]), "neighbour data");
      end
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
      if (su_we && su_wa != 0) model[su_wa] = su_wd;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
