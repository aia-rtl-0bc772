// ac_core: accelerator core (AC) of the AIA mesh.
//
// A small in-order RV32I core with the RV32M multiplies, extended with the
// Xprob instructions: the 64-word register file split into a shared and a
// private section (ac_regfile), access to the shared section of the four
// neighbouring cores, the rejection Knuth-Yao sampler (ky_sampler, fed by
// lfsr_rng) and the LUT interpolation unit (interp_unit), plus a global
// barrier instruction served by the event unit.
//
// Pipeline: two stages. The fetch stage presents the next PC to the
// synchronous instruction memory; the execute stage decodes the returned
// word, reads the register file, executes and writes back in the same
// cycle. Because the next PC is known at the end of the execute cycle, a
// taken branch costs no bubble. Instructions that take more than one cycle
// hold the execute stage and the instruction memory output:
//   * load/store: request until granted, then wait for rvalid (2 cycles on
//     the local scratchpad);
//   * Xprob neighbour access: until the neighbour's register file grants
//     (one cycle when no other neighbour reads it at the same time);
//   * Xprob sample: until the sampler is done; the sampler writes rd through
//     its own register-file write port;
//   * barrier: until the event unit releases all cores; meanwhile the event
//     unit drops clk_en_i, which freezes every flip-flop of the core (the
//     enable stands for the clock gate of the chip).
// The interpolation instruction and all ALU operations take one cycle.
//
// CSRs: 0x7D0 interpolation unit (IU.precision [6:5], IU.fraction [28:24],
// reset fraction 24), 0x7D1 sampler configuration, 0x7D2 LFSR seed,
// 0xB00 cycle counter, 0xF14 core index.
//
// Control: while fetch_en_i is low the core is idle and its pipeline state
// is cleared; when it rises the core fetches from address 0. EBREAK, ECALL
// or an unsupported instruction stops the core and raises halted_o.
//
// Follows the paper: the extended register file with its ports, the Xprob
// Types, the multi-cycle sample instruction that stalls the pipeline, the
// single-cycle interpolation, the neighbour reads and the barrier. Choices
// of this design: the two-stage pipeline stands in for the four-stage
// RI5CY pipeline and omits RI5CY's XpulpNN extensions, division,
// interrupts and debug; the CSR numbers other than 0x7D0; the boot address.
module ac_core
  import aia_pkg::*;
#(
  parameter int unsigned CORE_ID = 0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        fetch_en_i,
  input  logic        clk_en_i,       // low: clock of the core gated
  output logic        halted_o,
  // instruction memory (synchronous read, output held while instr_req_o is low)
  output logic        instr_req_o,
  output logic [31:0] instr_addr_o,
  input  logic [31:0] instr_rdata_i,
  // data bus
  output mem_req_t    data_req_o,
  input  mem_rsp_t    data_rsp_i,
  // reads of the neighbours' shared RF, indexed by dir_e
  output logic [3:0]  nb_req_o,
  output logic [4:0]  nb_adr_o,
  input  logic [3:0]  nb_gnt_i,
  input  logic [31:0] nb_data_i [4],
  // reads of this core's shared RF by the neighbours, indexed by their side
  input  logic [3:0]  nb_in_req_i,
  input  logic [4:0]  nb_in_adr_i [4],
  output logic [3:0]  nb_in_gnt_o,
  output logic [31:0] nb_in_data_o,
  // event unit
  output logic        barrier_req_o,
  input  logic        barrier_release_i
);

  // ---------------- pipeline state ----------------------------------------
  logic        started_q, halted_q, ex_valid_q;
  logic [31:0] ex_pc_q;
  logic        lsu_wait_q;
  logic        su_pending_q;
  logic [31:0] iu_csr_q, su_csr_q, mcycle_q;

  dec_t        dec;
  logic [31:0] instr;
  assign instr = instr_rdata_i;

  ac_decoder u_decoder (.instr_i(instr), .dec_o(dec));

  // ---------------- register file -----------------------------------------
  logic [31:0] rs1_val, rs2_val;
  logic        rf_we;
  logic [31:0] rf_wd;
  logic [4:0]  su_adr_a, su_adr_b, iu_adr_a, iu_adr_b;
  logic [31:0] su_data_a, su_data_b, iu_data_a, iu_data_b;
  logic        su_done;
  logic [31:0] su_result;
  logic [5:0]  su_rd_q;

  ac_regfile u_rf (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .ra_i       (dec.rs1),
    .rdata_a_o  (rs1_val),
    .rb_i       (dec.rs2),
    .rdata_b_o  (rs2_val),
    .we_i       (rf_we),
    .wa_i       (dec.rd),
    .wd_i       (rf_wd),
    .su_adr_a_i (su_adr_a),
    .su_data_a_o(su_data_a),
    .su_adr_b_i (su_adr_b),
    .su_data_b_o(su_data_b),
    .su_we_i    (su_done && clk_en_i),
    .su_wa_i    (su_rd_q),
    .su_wd_i    (su_result),
    .iu_adr_a_i (iu_adr_a),
    .iu_data_a_o(iu_data_a),
    .iu_adr_b_i (iu_adr_b),
    .iu_data_b_o(iu_data_b),
    .nb_req_i   (nb_in_req_i),
    .nb_adr_i   (nb_in_adr_i),
    .nb_gnt_o   (nb_in_gnt_o),
    .nb_data_o  (nb_in_data_o)
  );

  // ---------------- sampler and its random source ------------------------
  logic        su_start, su_busy, rb_take;
  logic [15:0] rb;
  logic        seed_we;
  logic [31:0] seed_val;

  lfsr_rng #(.OUT_BITS(16)) u_lfsr (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .seed_we_i(seed_we),
    .seed_i   (seed_val),
    .step_i   (rb_take && clk_en_i),
    .rb_o     (rb)
  );

  ky_sampler u_su (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .start_i    (su_start),
    .cfg_i      (su_csr_q),
    .su_adr_a_o (su_adr_a),
    .su_data_a_i(su_data_a),
    .su_adr_b_o (su_adr_b),
    .su_data_b_i(su_data_b),
    .rb_i       (rb),
    .rb_take_o  (rb_take),
    .busy_o     (su_busy),
    .done_o     (su_done),
    .result_o   (su_result)
  );

  // ---------------- interpolation unit ------------------------------------
  logic [31:0] iu_result;
  interp_unit u_iu (
    .rs1_i     (rs1_val),
    .csr_i     (iu_csr_q),
    .iu_adr_a_o(iu_adr_a),
    .iu_adr_b_o(iu_adr_b),
    .iu_data_a_i(iu_data_a),
    .iu_data_b_i(iu_data_b),
    .result_o  (iu_result)
  );

  // ---------------- ALU ---------------------------------------------------
  logic [31:0] opa, opb, alu_res;
  always_comb begin
    unique case (dec.opa)
      OPA_PC:   opa = ex_pc_q;
      OPA_ZERO: opa = '0;
      default:  opa = rs1_val;
    endcase
    unique case (dec.opb)
      OPB_IMM:      opb = dec.imm;
      OPB_NEIGHBOR: opb = nb_data_i[dec.nb_dir];
      default:      opb = rs2_val;
    endcase
  end

  always_comb begin
    logic [63:0] p_ss, p_su, p_uu;
    p_ss = 64'($signed(opa) * $signed(opb));
    p_uu = {32'd0, opa} * {32'd0, opb};
    p_su = 64'($signed({{32{opa[31]}}, opa}) * $signed({32'd0, opb}));
    unique case (dec.alu_op)
      ALU_ADD:    alu_res = opa + opb;
      ALU_SUB:    alu_res = opa - opb;
      ALU_XOR:    alu_res = opa ^ opb;
      ALU_OR:     alu_res = opa | opb;
      ALU_AND:    alu_res = opa & opb;
      ALU_SLL:    alu_res = opa << opb[4:0];
      ALU_SRL:    alu_res = opa >> opb[4:0];
      ALU_SRA:    alu_res = 32'($signed(opa) >>> opb[4:0]);
      ALU_SLT:    alu_res = {31'd0, $signed(opa) < $signed(opb)};
      ALU_SLTU:   alu_res = {31'd0, opa < opb};
      ALU_MUL:    alu_res = p_uu[31:0];
      ALU_MULH:   alu_res = p_ss[63:32];
      ALU_MULHSU: alu_res = p_su[63:32];
      ALU_MULHU:  alu_res = p_uu[63:32];
      default:    alu_res = opa + opb;
    endcase
  end

  // ---------------- branches ----------------------------------------------
  logic br_taken;
  always_comb begin
    unique case (dec.funct3)
      3'd0:    br_taken = (rs1_val == rs2_val);
      3'd1:    br_taken = (rs1_val != rs2_val);
      3'd4:    br_taken = ($signed(rs1_val) <  $signed(rs2_val));
      3'd5:    br_taken = ($signed(rs1_val) >= $signed(rs2_val));
      3'd6:    br_taken = (rs1_val <  rs2_val);
      3'd7:    br_taken = (rs1_val >= rs2_val);
      default: br_taken = 1'b0;
    endcase
  end

  // ---------------- CSRs --------------------------------------------------
  logic [31:0] csr_rdata, csr_src, csr_wdata;
  logic        csr_write;
  always_comb begin
    unique case (dec.csr)
      CSR_IU:      csr_rdata = iu_csr_q;
      CSR_SU:      csr_rdata = su_csr_q;
      CSR_MCYCLE:  csr_rdata = mcycle_q;
      CSR_MHARTID: csr_rdata = CORE_ID;
      default:     csr_rdata = '0;
    endcase
    csr_src = dec.funct3[2] ? dec.imm : rs1_val;
    unique case (dec.funct3[1:0])
      2'd1:    csr_wdata = csr_src;
      2'd2:    csr_wdata = csr_rdata | csr_src;
      default: csr_wdata = csr_rdata & ~csr_src;
    endcase
    // csrrs/csrrc with x0 / zero immediate do not write
    csr_write = (dec.funct3[1:0] == 2'd1) || (dec.rs1[4:0] != 5'd0);
  end

  // ---------------- load/store --------------------------------------------
  logic [31:0] ls_addr, load_val;
  logic [3:0]  st_be;
  logic [31:0] st_data;
  logic [1:0]  ls_off;
  assign ls_addr = rs1_val + dec.imm;
  assign ls_off  = ls_addr[1:0];
  always_comb begin
    unique case (dec.funct3[1:0])
      2'd0:    begin st_be = 4'b0001 << ls_off; st_data = {4{rs2_val[7:0]}};  end
      2'd1:    begin st_be = 4'b0011 << ls_off; st_data = {2{rs2_val[15:0]}}; end
      default: begin st_be = 4'b1111;           st_data = rs2_val;            end
    endcase
    unique case (dec.funct3)
      3'd0:    load_val = 32'($signed(data_rsp_i.rdata[ls_off*8 +: 8]));
      3'd4:    load_val = {24'd0, data_rsp_i.rdata[ls_off*8 +: 8]};
      3'd1:    load_val = 32'($signed(data_rsp_i.rdata[ls_off[1]*16 +: 16]));
      3'd5:    load_val = {16'd0, data_rsp_i.rdata[ls_off[1]*16 +: 16]};
      default: load_val = data_rsp_i.rdata;
    endcase
  end

  logic is_mem;
  assign is_mem = ex_valid_q && (dec.iclass == CL_LOAD || dec.iclass == CL_STORE);
  always_comb begin
    data_req_o       = '0;
    data_req_o.req   = is_mem && !lsu_wait_q && clk_en_i;
    data_req_o.we    = (dec.iclass == CL_STORE);
    data_req_o.be    = (dec.iclass == CL_STORE) ? st_be : 4'b1111;
    data_req_o.addr  = {ls_addr[31:2], 2'b00};
    data_req_o.wdata = st_data;
  end

  // ---------------- neighbour access, barrier -----------------------------
  logic is_nb;
  assign is_nb    = ex_valid_q && dec.iclass == CL_ALU && dec.opb == OPB_NEIGHBOR;
  assign nb_adr_o = dec.rs2[4:0];
  always_comb begin
    nb_req_o = '0;
    if (is_nb && clk_en_i) nb_req_o[dec.nb_dir] = 1'b1;
  end
  assign barrier_req_o = ex_valid_q && dec.iclass == CL_BARRIER;

  // ---------------- completion and next PC -------------------------------
  logic        complete, halt_now;
  logic [31:0] next_pc;
  always_comb begin
    complete = 1'b0;
    halt_now = 1'b0;
    next_pc  = ex_pc_q + 32'd4;
    rf_we    = 1'b0;
    rf_wd    = alu_res;
    su_start = 1'b0;
    seed_we  = 1'b0;
    seed_val = csr_wdata;
    if (ex_valid_q) begin
      unique case (dec.iclass)
        CL_ALU: begin
          complete = !is_nb || nb_gnt_i[dec.nb_dir];
          rf_we    = complete && dec.rd_we;
        end
        CL_BRANCH: begin
          complete = 1'b1;
          if (br_taken) next_pc = ex_pc_q + dec.imm;
        end
        CL_JAL, CL_JALR: begin
          complete = 1'b1;
          rf_we    = dec.rd_we;
          rf_wd    = ex_pc_q + 32'd4;
          next_pc  = (dec.iclass == CL_JAL) ? ex_pc_q + dec.imm
                                            : ((rs1_val + dec.imm) & ~32'd1);
        end
        CL_LOAD, CL_STORE: begin
          complete = lsu_wait_q && data_rsp_i.rvalid;
          rf_we    = complete && dec.iclass == CL_LOAD;
          rf_wd    = load_val;
        end
        CL_CSR: begin
          complete = 1'b1;
          rf_we    = dec.rd_we;
          rf_wd    = csr_rdata;
          seed_we  = csr_write && dec.csr == CSR_SU_SEED;
        end
        CL_SAMPLE: begin
          su_start = !su_pending_q && !su_busy;
          complete = su_pending_q && su_done;
        end
        CL_LUT: begin
          complete = 1'b1;
          rf_we    = dec.rd_we;
          rf_wd    = iu_result;
        end
        CL_BARRIER: complete = barrier_release_i;
        CL_NOP:     complete = 1'b1;
        default: begin   // CL_HALT, CL_ILLEGAL
          complete = 1'b1;
          halt_now = 1'b1;
        end
      endcase
    end
    if (!clk_en_i) begin
      complete = 1'b0;
      rf_we    = 1'b0;
      su_start = 1'b0;
      seed_we  = 1'b0;
    end
  end

  // ---------------- fetch --------------------------------------------------
  logic boot;
  assign boot         = fetch_en_i && !started_q && clk_en_i;
  assign instr_req_o  = boot || (complete && !halt_now && fetch_en_i);
  assign instr_addr_o = boot ? 32'd0 : next_pc;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      started_q    <= 1'b0;
      halted_q     <= 1'b0;
      ex_valid_q   <= 1'b0;
      ex_pc_q      <= '0;
      lsu_wait_q   <= 1'b0;
      su_pending_q <= 1'b0;
      su_rd_q      <= '0;
      iu_csr_q     <= 32'h1800_0000;
      su_csr_q     <= '0;
      mcycle_q     <= '0;
    end else if (!fetch_en_i) begin
      started_q    <= 1'b0;
      halted_q     <= 1'b0;
      ex_valid_q   <= 1'b0;
      lsu_wait_q   <= 1'b0;
    end else if (clk_en_i) begin
      if (started_q) mcycle_q <= mcycle_q + 32'd1;
      if (boot) begin
        started_q  <= 1'b1;
        ex_valid_q <= 1'b1;
        ex_pc_q    <= '0;
      end else if (complete) begin
        if (halt_now) begin
          ex_valid_q <= 1'b0;
          halted_q   <= 1'b1;
        end else begin
          ex_pc_q <= next_pc;
        end
      end
      // load/store handshake
      if (data_req_o.req && data_rsp_i.gnt) lsu_wait_q <= 1'b1;
      else if (lsu_wait_q && data_rsp_i.rvalid) lsu_wait_q <= 1'b0;
      // sampler handshake
      if (su_start) begin
        su_pending_q <= 1'b1;
        su_rd_q      <= dec.rd;
      end else if (su_done) begin
        su_pending_q <= 1'b0;
      end
      // CSR writes
      if (ex_valid_q && dec.iclass == CL_CSR && csr_write) begin
        if (dec.csr == CSR_IU) iu_csr_q <= csr_wdata;
        if (dec.csr == CSR_SU) su_csr_q <= csr_wdata;
      end
    end
  end

  assign halted_o = halted_q;

  // a granted memory request is answered in a later cycle, never the same one
  a_rvalid_after_gnt: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                       data_rsp_i.rvalid |-> lsu_wait_q);

endmodule
