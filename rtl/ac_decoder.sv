// ac_decoder: instruction decoder of an accelerator core.
//
// Decodes RV32I, the multiply instructions of RV32M (MUL, MULH, MULHSU,
// MULHU) and the Xprob extension into the dec_t control struct of aia_pkg.
// Purely combinational.
//
// Xprob instructions use opcode 0x3b; bits [31:29] are the Type, [28:25]
// the Op (the ALU operation), [24:20] rs2, [19:15] rs1, [14:12] DT,
// [11:7] rd:
//   Type 0  large RF access:  {DT[2],rd} = {DT[1],rs1} Op {DT[0],rs2};
//           a 1 in a DT bit selects the private section (index 32..63).
//   Type 1  neighbour access: rd = rs1 Op neighbour.shared[rs2], the
//           neighbour chosen by DT = 0 W, 1 N, 2 S, 3 E.
//   Type 2  rd = sample from the distribution in the private RF.
//   Type 3  rd = LUT(rs1), linear interpolation.
//   Type 4  global barrier (no operands).
// Op: 0 add, 1 sub, 2 xor, 3 or, 4 and, 5 sll, 6 srl, 7 sra, 8 mul,
// 9 slt, 10 sltu, 11 mulh, 12 mulhsu, 13 mulhu.
// The field layout, opcode, Types 0-3, Op 0 = add, Op 1 = sub and the DT
// meanings are the paper's; the other Op codes and Type 4 are this
// design's. EBREAK and ECALL halt the core; FENCE is a no-op; division and
// anything else unknown decode as CL_ILLEGAL.
module ac_decoder
  import aia_pkg::*;
(
  input  logic [31:0] instr_i,
  output dec_t        dec_o
);

  logic [6:0] opc;
  logic [2:0] f3, xtype, dt;
  logic [6:0] f7;
  logic [3:0] xop;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opc   = instr_i[6:0];
  assign f3    = instr_i[14:12];
  assign f7    = instr_i[31:25];
  assign xtype = instr_i[31:29];
  assign xop   = instr_i[28:25];
  assign dt    = instr_i[14:12];

  assign imm_i = {{20{instr_i[31]}}, instr_i[31:20]};
  assign imm_s = {{20{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
  assign imm_b = {{19{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
  assign imm_u = {instr_i[31:12], 12'd0};
  assign imm_j = {{11{instr_i[31]}}, instr_i[31], instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};

  always_comb begin
    dec_o        = '0;
    dec_o.iclass = CL_ILLEGAL;
    dec_o.alu_op = ALU_ADD;
    dec_o.opa    = OPA_RS1;
    dec_o.opb    = OPB_RS2;
    dec_o.rs1    = {1'b0, instr_i[19:15]};
    dec_o.rs2    = {1'b0, instr_i[24:20]};
    dec_o.rd     = {1'b0, instr_i[11:7]};
    dec_o.funct3 = f3;
    dec_o.nb_dir = DIR_W;
    dec_o.csr    = instr_i[31:20];
    unique case (opc)
      OPC_LUI: begin
        dec_o.iclass = CL_ALU; dec_o.opa = OPA_ZERO; dec_o.opb = OPB_IMM;
        dec_o.imm = imm_u; dec_o.rd_we = 1'b1;
      end
      OPC_AUIPC: begin
        dec_o.iclass = CL_ALU; dec_o.opa = OPA_PC; dec_o.opb = OPB_IMM;
        dec_o.imm = imm_u; dec_o.rd_we = 1'b1;
      end
      OPC_JAL: begin
        dec_o.iclass = CL_JAL; dec_o.imm = imm_j; dec_o.rd_we = 1'b1;
      end
      OPC_JALR: if (f3 == 3'd0) begin
        dec_o.iclass = CL_JALR; dec_o.imm = imm_i; dec_o.rd_we = 1'b1;
      end
      OPC_BRANCH: if (f3 != 3'd2 && f3 != 3'd3) begin
        dec_o.iclass = CL_BRANCH; dec_o.imm = imm_b;
      end
      OPC_LOAD: if (f3 inside {3'd0, 3'd1, 3'd2, 3'd4, 3'd5}) begin
        dec_o.iclass = CL_LOAD; dec_o.imm = imm_i; dec_o.rd_we = 1'b1;
      end
      OPC_STORE: if (f3 inside {3'd0, 3'd1, 3'd2}) begin
        dec_o.iclass = CL_STORE; dec_o.imm = imm_s;
      end
      OPC_OPIMM: begin
        dec_o.iclass = CL_ALU; dec_o.opb = OPB_IMM; dec_o.imm = imm_i; dec_o.rd_we = 1'b1;
        unique case (f3)
          3'd0: dec_o.alu_op = ALU_ADD;
          3'd2: dec_o.alu_op = ALU_SLT;
          3'd3: dec_o.alu_op = ALU_SLTU;
          3'd4: dec_o.alu_op = ALU_XOR;
          3'd6: dec_o.alu_op = ALU_OR;
          3'd7: dec_o.alu_op = ALU_AND;
          3'd1: if (f7 == 7'd0) dec_o.alu_op = ALU_SLL; else dec_o.iclass = CL_ILLEGAL;
          3'd5: if (f7 == 7'd0) dec_o.alu_op = ALU_SRL;
                else if (f7 == 7'h20) dec_o.alu_op = ALU_SRA;
                else dec_o.iclass = CL_ILLEGAL;
          default: dec_o.iclass = CL_ILLEGAL;
        endcase
      end
      OPC_OP: begin
        dec_o.iclass = CL_ALU; dec_o.rd_we = 1'b1;
        unique case ({f7, f3})
          {7'h00, 3'd0}: dec_o.alu_op = ALU_ADD;
          {7'h20, 3'd0}: dec_o.alu_op = ALU_SUB;
          {7'h00, 3'd1}: dec_o.alu_op = ALU_SLL;
          {7'h00, 3'd2}: dec_o.alu_op = ALU_SLT;
          {7'h00, 3'd3}: dec_o.alu_op = ALU_SLTU;
          {7'h00, 3'd4}: dec_o.alu_op = ALU_XOR;
          {7'h00, 3'd5}: dec_o.alu_op = ALU_SRL;
          {7'h20, 3'd5}: dec_o.alu_op = ALU_SRA;
          {7'h00, 3'd6}: dec_o.alu_op = ALU_OR;
          {7'h00, 3'd7}: dec_o.alu_op = ALU_AND;
          {7'h01, 3'd0}: dec_o.alu_op = ALU_MUL;
          {7'h01, 3'd1}: dec_o.alu_op = ALU_MULH;
          {7'h01, 3'd2}: dec_o.alu_op = ALU_MULHSU;
          {7'h01, 3'd3}: dec_o.alu_op = ALU_MULHU;
          default: begin dec_o.iclass = CL_ILLEGAL; dec_o.rd_we = 1'b0; end
        endcase
      end
      OPC_FENCE: dec_o.iclass = CL_NOP;
      OPC_SYSTEM: begin
        if (f3 == 3'd0) begin
          if (instr_i[31:7] == 25'd0 || instr_i[31:7] == {12'd1, 13'd0})
            dec_o.iclass = CL_HALT;                 // ECALL / EBREAK
          else if (instr_i[31:20] == 12'h105)
            dec_o.iclass = CL_NOP;                  // WFI
        end else if (f3 != 3'd4) begin
          dec_o.iclass = CL_CSR; dec_o.rd_we = 1'b1;
          dec_o.imm    = {27'd0, instr_i[19:15]};   // zimm
        end
      end
      OPC_XPROB: begin
        unique case (xtype)
          XT_LARGE_RF, XT_NEIGHBOR: if (xop <= 4'(ALU_MULHU)) begin
            dec_o.iclass = CL_ALU;
            dec_o.alu_op = alu_op_e'(xop);
            dec_o.rd_we  = 1'b1;
            if (xtype == XT_LARGE_RF) begin
              dec_o.rd  = {dt[2], instr_i[11:7]};
              dec_o.rs1 = {dt[1], instr_i[19:15]};
              dec_o.rs2 = {dt[0], instr_i[24:20]};
            end else begin
              dec_o.opb    = OPB_NEIGHBOR;
              dec_o.nb_dir = dir_e'(dt[1:0]);
            end
          end
          XT_SAMPLE:  begin dec_o.iclass = CL_SAMPLE;  dec_o.rd_we = 1'b1; end
          XT_LUT:     begin dec_o.iclass = CL_LUT;     dec_o.rd_we = 1'b1; end
          XT_BARRIER: dec_o.iclass = CL_BARRIER;
          default:    dec_o.iclass = CL_ILLEGAL;
        endcase
      end
      default: dec_o.iclass = CL_ILLEGAL;
    endcase
  end

endmodule
