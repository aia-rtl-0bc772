// aia_pkg: types and constants shared by the AIA accelerator mesh.
//
// Holds the Xprob custom-instruction encoding (opcode 0x3b, Type field in
// bits [31:29], Op in [28:25], DT in [14:12]), the CSR addresses of the
// interpolation and sampler units, the request/response structs of the
// word-addressed memory buses, the host address map, and the decoded
// instruction struct passed from the decoder to the core.
// The instruction fields, opcode and CSR 0x7D0 layout follow the paper;
// the Op codes beyond add/sub, the barrier Type, the sampler CSRs and the
// address map are choices of this design.
package aia_pkg;

  // ---------------- mesh geometry --------------------------------------
  localparam int unsigned MESH_ROWS  = 4;
  localparam int unsigned MESH_COLS  = 4;
  localparam int unsigned N_CORES    = MESH_ROWS * MESH_COLS;
  localparam int unsigned N_GB_PORTS = 4;   // only the top row reaches the global buffer

  // ---------------- register file --------------------------------------
  localparam int unsigned RF_WORDS     = 64;
  localparam int unsigned SHARED_WORDS = 32;  // x0..x31, readable by neighbours
  localparam int unsigned PRIV_WORDS   = RF_WORDS - SHARED_WORDS;

  // Neighbour directions as encoded by DT of a Type-1 instruction.
  typedef enum logic [1:0] {
    DIR_W = 2'd0,
    DIR_N = 2'd1,
    DIR_S = 2'd2,
    DIR_E = 2'd3
  } dir_e;

  // ---------------- Xprob encoding -------------------------------------
  localparam logic [6:0] OPC_XPROB  = 7'h3b;
  localparam logic [6:0] OPC_LUI    = 7'h37;
  localparam logic [6:0] OPC_AUIPC  = 7'h17;
  localparam logic [6:0] OPC_JAL    = 7'h6f;
  localparam logic [6:0] OPC_JALR   = 7'h67;
  localparam logic [6:0] OPC_BRANCH = 7'h63;
  localparam logic [6:0] OPC_LOAD   = 7'h03;
  localparam logic [6:0] OPC_STORE  = 7'h23;
  localparam logic [6:0] OPC_OPIMM  = 7'h13;
  localparam logic [6:0] OPC_OP     = 7'h33;
  localparam logic [6:0] OPC_SYSTEM = 7'h73;
  localparam logic [6:0] OPC_FENCE  = 7'h0f;

  typedef enum logic [2:0] {
    XT_LARGE_RF = 3'd0,   // {DT[2],rd} = {DT[1],rs1} op {DT[0],rs2}
    XT_NEIGHBOR = 3'd1,   // rd = rs1 op neighbour[DT].shared[rs2]
    XT_SAMPLE   = 3'd2,   // rd ~ distribution in private RF
    XT_LUT      = 3'd3,   // rd = LUT(rs1)
    XT_BARRIER  = 3'd4    // global barrier (encoding chosen by this design)
  } xtype_e;

  // ALU operations; Xprob Op field values 0 (add) and 1 (sub) are the paper's.
  typedef enum logic [3:0] {
    ALU_ADD  = 4'd0,
    ALU_SUB  = 4'd1,
    ALU_XOR  = 4'd2,
    ALU_OR   = 4'd3,
    ALU_AND  = 4'd4,
    ALU_SLL  = 4'd5,
    ALU_SRL  = 4'd6,
    ALU_SRA  = 4'd7,
    ALU_MUL  = 4'd8,
    ALU_SLT  = 4'd9,
    ALU_SLTU = 4'd10,
    ALU_MULH = 4'd11,
    ALU_MULHSU = 4'd12,
    ALU_MULHU  = 4'd13
  } alu_op_e;

  // ---------------- CSRs -----------------------------------------------
  localparam logic [11:0] CSR_IU      = 12'h7D0;  // IU.precision [6:5], IU.fraction [28:24]
  localparam logic [11:0] CSR_SU      = 12'h7D1;  // nbins [5:0], lane mode [10:8], base [20:16]
  localparam logic [11:0] CSR_SU_SEED = 12'h7D2;  // LFSR seed (write)
  localparam logic [11:0] CSR_MCYCLE  = 12'hB00;
  localparam logic [11:0] CSR_MHARTID = 12'hF14;

  // ---------------- decoded instruction --------------------------------
  typedef enum logic [3:0] {
    CL_ALU, CL_BRANCH, CL_JAL, CL_JALR, CL_LOAD, CL_STORE, CL_CSR,
    CL_SAMPLE, CL_LUT, CL_BARRIER, CL_HALT, CL_NOP, CL_ILLEGAL
  } iclass_e;

  typedef enum logic [1:0] { OPA_RS1, OPA_PC, OPA_ZERO } opa_sel_e;
  typedef enum logic [1:0] { OPB_RS2, OPB_IMM, OPB_NEIGHBOR } opb_sel_e;

  typedef struct packed {
    iclass_e     iclass;
    alu_op_e     alu_op;
    opa_sel_e    opa;
    opb_sel_e    opb;
    logic [5:0]  rs1;       // 6-bit RF index: bit 5 selects the private section
    logic [5:0]  rs2;
    logic [5:0]  rd;
    logic        rd_we;
    logic [31:0] imm;
    logic [2:0]  funct3;    // branch condition, load/store size, CSR op
    dir_e        nb_dir;    // neighbour for XT_NEIGHBOR
    logic [11:0] csr;
  } dec_t;

  // ---------------- memory buses ---------------------------------------
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // Host transaction carried through the cross-clock FIFO.
  typedef struct packed {
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } host_req_t;

  localparam int unsigned HOST_REQ_W = $bits(host_req_t);

  // ---------------- address map ----------------------------------------
  // Host view:
  //   0x1000_0000 + core*0x1_0000 + 0x0000 : instruction memory of a core
  //   0x1000_0000 + core*0x1_0000 + 0x8000 : data scratchpad of a core
  //   0x2000_0000                          : global buffer
  //   0x3000_0000                          : mesh control registers
  // Core view of data: below 0x1000_0000 the local scratchpad, from
  // 0x2000_0000 the global buffer (top-row cores only).
  localparam logic [3:0] REGION_TILE = 4'h1;
  localparam logic [3:0] REGION_GB   = 4'h2;
  localparam logic [3:0] REGION_CTRL = 4'h3;

  localparam logic [7:0] CTRL_FETCH_EN = 8'h00;
  localparam logic [7:0] CTRL_HALTED   = 8'h04;
  localparam logic [7:0] CTRL_BARRIERS = 8'h08;

endpackage
