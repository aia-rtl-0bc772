// tb_ac_decoder: self-checking test of the instruction decoder.
//
// Decodes hand-encoded RV32I/M instructions and random Xprob instructions of
// every Type, and checks class, ALU operation, the 6-bit register indices
// formed from DT, the neighbour direction, immediates and illegal encodings.
module tb_ac_decoder;
  import aia_pkg::*;
  import aia_asm_pkg::*;
  logic [31:0] instr;
  dec_t d;
  int checks = 0, failures = 0;

  ac_decoder dut (.instr_i(instr), .dec_o(d));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (instr %h)", what, instr); end
  endtask

  initial begin
    instr = addi(5, 6, -3); #1;
    check(d.iclass == CL_ALU && d.alu_op == ALU_ADD && d.opb == OPB_IMM && d.imm == -32'sd3 &&
          d.rd == 5 && d.rs1 == 6 && d.rd_we, "addi");
    instr = sub(1, 2, 3); #1;
    check(d.iclass == CL_ALU && d.alu_op == ALU_SUB && d.opb == OPB_RS2 && d.rs2 == 3, "sub");
    instr = mulhu(1, 2, 3); #1;   check(d.alu_op == ALU_MULHU, "mulhu");
    instr = srai(1, 2, 7); #1;    check(d.alu_op == ALU_SRA && d.imm[4:0] == 7, "srai");
    instr = lw(7, 8, 12); #1;     check(d.iclass == CL_LOAD && d.imm == 12 && d.funct3 == 2, "lw");
    instr = sw(7, 8, -4); #1;     check(d.iclass == CL_STORE && d.imm == -32'sd4 && d.rs2 == 7 && !d.rd_we, "sw");
    instr = beq(1, 2, -8); #1;    check(d.iclass == CL_BRANCH && d.imm == -32'sd8, "beq");
    instr = jal(1, 2048); #1;     check(d.iclass == CL_JAL && d.imm == 2048, "jal");
    instr = jalr(0, 1, 4); #1;    check(d.iclass == CL_JALR && d.imm == 4, "jalr");
    instr = lui(3, 20'hABCDE); #1; check(d.opa == OPA_ZERO && d.imm == 32'hABCDE000, "lui");
    instr = auipc(3, 1); #1;      check(d.opa == OPA_PC && d.imm == 32'h1000, "auipc");
    instr = csrrw(4, 12'h7D0, 5); #1; check(d.iclass == CL_CSR && d.csr == 12'h7D0 && d.funct3 == 1, "csrrw");
    instr = ebreak(); #1;         check(d.iclass == CL_HALT, "ebreak");
    instr = r_type(1, 2, 3, 4, 5, 7'h33); #1; check(d.iclass == CL_ILLEGAL && !d.rd_we, "div is not supported");
    instr = 32'hFFFF_FFFF; #1;    check(d.iclass == CL_ILLEGAL, "all ones");
    // paper example: Xprob.add.hll x1, x1, x2 -> rd private, rs1/rs2 shared
    instr = xprob(0, 0, 2, 1, 3'b100, 1); #1;
    check(d.iclass == CL_ALU && d.rd == 6'd33 && d.rs1 == 6'd1 && d.rs2 == 6'd2 && d.alu_op == ALU_ADD, "add.hll");
    for (int t = 0; t < 2000; t++) begin
      automatic int typ = $urandom % 8, op = $urandom % 16, rs2 = $urandom % 32, rs1 = $urandom % 32;
      automatic int dt = $urandom % 8, rd = $urandom % 32;
      instr = xprob(typ, op, rs2, rs1, dt, rd); #1;
      case (typ)
        0, 1: if (op <= 13) begin
          check(d.iclass == CL_ALU && d.alu_op == alu_op_e'(op) && d.rd_we, "type0/1 ALU op");
          if (typ == 0) check(d.rd == 6'((dt >> 2) * 32 + rd) && d.rs1 == 6'(((dt >> 1) & 1) * 32 + rs1) &&
                              d.rs2 == 6'((dt & 1) * 32 + rs2) && d.opb == OPB_RS2, "type0 indices");
          else check(d.rd == 6'(rd) && d.rs1 == 6'(rs1) && d.rs2 == 6'(rs2) && d.opb == OPB_NEIGHBOR &&
                     d.nb_dir == dir_e'(dt % 4), "type1 neighbour");
        end else check(d.iclass == CL_ILLEGAL, "undefined op");
        2: check(d.iclass == CL_SAMPLE && d.rd == 6'(rd) && d.rd_we, "type2 sample");
        3: check(d.iclass == CL_LUT && d.rd == 6'(rd) && d.rs1 == 6'(rs1) && d.rd_we, "type3 lut");
        4: check(d.iclass == CL_BARRIER && !d.rd_we, "barrier");
        default: check(d.iclass == CL_ILLEGAL, "undefined type");
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
