// riscv_pkg: types and constants shared by the core, the cluster and their testbenches.
//
// It holds the opcodes, the operator enumerations of the ALU, multiplier, LSU and CSR
// unit, the decoded-instruction struct that the decoder hands to the ID stage, and the
// custom-instruction encodings. The instruction mnemonics and their semantics follow the
// paper (hardware loops, post-increment and register-offset loads/stores, fixed-point
// add/sub/mul/mac with round and normalize, clip, bit manipulation, packed SIMD with
// dot products and shuffle). The paper gives no bit encodings for them, so the encodings
// below are this design's own: they sit in the custom opcode spaces of RV32 and in an
// otherwise unused funct7 of OP.
package riscv_pkg;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_LOAD     = 7'h03;
  localparam logic [6:0] OPC_LOAD_PI  = 7'h0B;  // custom-0: post-increment / register-offset loads
  localparam logic [6:0] OPC_OPIMM    = 7'h13;
  localparam logic [6:0] OPC_AUIPC    = 7'h17;
  localparam logic [6:0] OPC_STORE    = 7'h23;
  localparam logic [6:0] OPC_STORE_PI = 7'h2B;  // custom-1: post-increment / register-offset stores
  localparam logic [6:0] OPC_OP       = 7'h33;
  localparam logic [6:0] OPC_LUI      = 7'h37;
  localparam logic [6:0] OPC_VECOP    = 7'h57;  // packed-SIMD instructions
  localparam logic [6:0] OPC_PULP     = 7'h5B;  // custom-2: fixed point and bit manipulation with immediates
  localparam logic [6:0] OPC_BRANCH   = 7'h63;
  localparam logic [6:0] OPC_JALR     = 7'h67;
  localparam logic [6:0] OPC_JAL      = 7'h6F;
  localparam logic [6:0] OPC_SYSTEM   = 7'h73;
  localparam logic [6:0] OPC_HWLOOP   = 7'h7B;  // custom-3: hardware loops

  // funct7 values of OPC_OP used by the extensions
  localparam logic [6:0] F7_PULP_ALU  = 7'h02;  // p.abs, p.min(u), p.max(u)
  localparam logic [6:0] F7_PULP_BIT  = 7'h08;  // p.ff1, p.fl1, p.clb, p.cnt, p.ext{h,b}{s,z}
  localparam logic [6:0] F7_PULP_MAC  = 7'h21;  // p.mac, p.msu

  // vector operation codes, instr[31:26] of OPC_VECOP
  typedef enum logic [5:0] {
    VOP_ADD = 6'd0, VOP_SUB = 6'd1, VOP_AVG = 6'd2, VOP_AVGU = 6'd3,
    VOP_MIN = 6'd4, VOP_MINU = 6'd5, VOP_MAX = 6'd6, VOP_MAXU = 6'd7,
    VOP_SRL = 6'd8, VOP_SRA = 6'd9, VOP_SLL = 6'd10, VOP_OR = 6'd11,
    VOP_XOR = 6'd12, VOP_AND = 6'd13, VOP_ABS = 6'd14, VOP_EXTRACT = 6'd15,
    VOP_EXTRACTU = 6'd16, VOP_INSERT = 6'd17,
    VOP_DOTUP = 6'd18, VOP_DOTUSP = 6'd19, VOP_DOTSP = 6'd20,
    VOP_SDOTUP = 6'd21, VOP_SDOTUSP = 6'd22, VOP_SDOTSP = 6'd23,
    VOP_SHUFFLE = 6'd24, VOP_SHUFFLE2 = 6'd25, VOP_PACK = 6'd26, VOP_PACKHI = 6'd27,
    VOP_CMPEQ = 6'd32, VOP_CMPNE = 6'd33, VOP_CMPGT = 6'd34, VOP_CMPGE = 6'd35,
    VOP_CMPLT = 6'd36, VOP_CMPLE = 6'd37, VOP_CMPGTU = 6'd38, VOP_CMPGEU = 6'd39,
    VOP_CMPLTU = 6'd40, VOP_CMPLEU = 6'd41
  } vop_e;

  // ---------------------------------------------------------------- ALU
  typedef enum logic [1:0] { VEC_32 = 2'd0, VEC_16 = 2'd1, VEC_8 = 2'd2 } vec_mode_e;

  typedef enum logic [5:0] {
    ALU_ADD, ALU_SUB, ALU_ADDN, ALU_SUBN, ALU_ADDRN, ALU_SUBRN,
    ALU_XOR, ALU_OR, ALU_AND,
    ALU_SLL, ALU_SRL, ALU_SRA,
    ALU_SLT, ALU_SLTU, ALU_EQ, ALU_NE, ALU_LT, ALU_GE, ALU_LTU, ALU_GEU,
    ALU_GT, ALU_LE, ALU_GTU, ALU_LEU,
    ALU_MIN, ALU_MINU, ALU_MAX, ALU_MAXU, ALU_ABS, ALU_AVG, ALU_AVGU,
    ALU_CLIP, ALU_CLIPU,
    ALU_EXTRACT, ALU_EXTRACTU, ALU_INSERT, ALU_BCLR, ALU_BSET,
    ALU_CNT, ALU_FF1, ALU_FL1, ALU_CLB,
    ALU_EXTHS, ALU_EXTHZ, ALU_EXTBS, ALU_EXTBZ,
    ALU_SHUF, ALU_SHUF2, ALU_PACK, ALU_PACKHI, ALU_PACKLO,
    ALU_VEXT, ALU_VEXTU, ALU_VINS
  } alu_op_e;

  // ---------------------------------------------------------------- multiplier
  typedef enum logic [3:0] {
    MUL_MUL,     // 32x32 low word
    MUL_MULH, MUL_MULHSU, MUL_MULHU,
    MUL_MAC, MUL_MSU,         // rD +/- rA*rB, 32b
    MUL_FRAC,    // 16x16 (+ rD) with round and normalize
    MUL_DOT16, MUL_DOT8       // dot products, with accumulator when dot_acc
  } mul_op_e;

  // ---------------------------------------------------------------- divider
  typedef enum logic [1:0] { DIV_DIV, DIV_DIVU, DIV_REM, DIV_REMU } div_op_e;

  // ---------------------------------------------------------------- LSU
  typedef enum logic [1:0] { LSU_BYTE = 2'd0, LSU_HALF = 2'd1, LSU_WORD = 2'd2 } lsu_size_e;

  // ---------------------------------------------------------------- CSR
  typedef enum logic [1:0] { CSR_NONE, CSR_WRITE, CSR_SET, CSR_CLEAR } csr_op_e;

  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MCYCLE   = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET = 12'hB02;
  localparam logic [11:0] CSR_MHARTID  = 12'hF14;
  // hardware loop registers, set i at 0x7B0 + 4*i: +0 start, +1 end, +2 count
  localparam logic [11:0] CSR_HWLP_BASE = 12'h7B0;

  localparam logic [4:0] EXC_ILLEGAL = 5'd2;
  localparam logic [4:0] EXC_BREAK   = 5'd3;
  localparam logic [4:0] EXC_ECALL   = 5'd11;

  // hardware loop instructions, funct3 of OPC_HWLOOP
  typedef enum logic [2:0] {
    HWLP_STARTI = 3'd0, HWLP_ENDI = 3'd1, HWLP_COUNT = 3'd2, HWLP_COUNTI = 3'd3,
    HWLP_SETUP = 3'd4, HWLP_SETUPI = 3'd5
  } hwlp_op_e;

  // operand-a / b source selection in the ID stage
  typedef enum logic [1:0] { OPA_REG, OPA_PC, OPA_ZERO } opa_sel_e;
  typedef enum logic [2:0] { OPB_REG, OPB_IMM, OPB_PCINC, OPB_REPL, OPB_REGC } opb_sel_e;

  // decoded instruction, produced by the decoder for the ID stage
  typedef struct packed {
    logic        illegal;
    logic        ecall;
    logic        ebreak;
    logic        mret;
    // register file
    logic        rega_used, regb_used, regc_used;
    logic [4:0]  rega, regb, regc;     // rA = rs1, rB = rs2, rC = rd or offset register
    logic        rf_we_a;              // EX result written through port A
    logic [4:0]  rf_waddr_a;
    // operands
    opa_sel_e    opa_sel;
    opb_sel_e    opb_sel;
    logic [31:0] imm;                  // immediate for operand b
    // units
    logic        alu_en;
    alu_op_e     alu_op;
    vec_mode_e   vec_mode;
    logic [4:0]  bmask_a;              // normalisation amount I, clip bound, bit-field length-1 or lane
    logic [4:0]  bmask_b;              // bit-field offset
    logic        mul_en;
    mul_op_e     mul_op;
    logic        mul_signed_a, mul_signed_b;
    logic        mul_hh;               // fractional: use upper halves
    logic        mul_round;            // fractional: round before shift
    logic        mul_acc;              // fractional/dot: add rC
    logic        div_en;
    div_op_e     div_op;
    logic        csr_en;
    csr_op_e     csr_op;
    logic        csr_imm;
    // LSU
    logic        lsu_en;
    logic        lsu_we;
    lsu_size_e   lsu_size;
    logic        lsu_signed;
    logic        lsu_post;             // post increment: access at rA, rA += offset
    logic        lsu_regoff;           // offset from register (rB for loads, rC for stores)
    // control flow
    logic        branch;
    logic        jal, jalr;
    // hardware loops
    logic        hwlp_en;
    hwlp_op_e    hwlp_op;
    logic        hwlp_set;
  } dec_t;

  // per-cycle event flags of a core, for performance counting
  typedef struct packed {
    logic instr_retired;   // an instruction left EX
    logic compressed;      // a compressed instruction entered ID
    logic load_use_stall;  // ID held for a load result
    logic ex_stall;        // EX held (divider, LSU grant, misaligned second part)
    logic wb_stall;        // pipeline held for missing load data
    logic fetch_stall;     // ID empty because the L0 buffer had no instruction
    logic branch_taken;
    logic jump;
    logic hwlp_jump;       // fetch redirected by a hardware loop
    logic misaligned;      // a misaligned access was split
    logic line_cross;      // a 32b instruction across two cache lines was joined
    logic trap;
  } core_events_t;

  // one data request and its answer on the TCDM / peripheral side (req/gnt/rvalid)
  typedef struct packed {
    logic        req;
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

endpackage
