// decoder: instruction decoder of the ID stage.
//
// Turns one 32b instruction (compressed ones are already expanded in IF) into the
// control word dec_t: which registers are read on the three read ports, which unit
// executes (ALU, multiplier, divider, CSR, LSU), which operator, the operand sources,
// the immediate, and whether port A writes a result. It covers RV32I, RV32M and the
// extensions listed in the paper's instruction table: hardware loops (lp.starti, lp.endi,
// lp.count, lp.counti, lp.setup, lp.setupi), loads and stores with register offset and
// with post-increment by immediate or register, fixed-point add/sub/mul/mac with
// normalisation and rounding, p.clip, the bit-manipulation instructions, p.mac/p.msu, and
// the packed-SIMD instructions on halfwords and bytes in the vector-vector, vector-scalar
// (scalar replicated) and vector-immediate forms, including dot products and shuffle.
// The bit encodings of the extensions are this design's own; riscv_pkg lists them.
// Unknown encodings raise illegal. Combinational.
module decoder
  import riscv_pkg::*;
(
  input  logic [31:0] instr_i,
  input  logic        illegal_c_i,
  output dec_t        dec_o,
  output logic [31:0] jump_imm_o        // branch / jal / jalr offset
);

  logic [6:0]  opcode, funct7;
  logic [2:0]  funct3;
  logic [4:0]  rd, rs1, rs2;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  logic [5:0]  imm6;
  vop_e        vop;
  logic        ld_regoff, ld_post, st_regoff, st_post;
  logic [2:0]  ld_f;                  // size/sign code of a load

  // addressing mode of the loads and stores
  assign ld_regoff = instr_i[6:0] == OPC_LOAD_PI && instr_i[14:12] == 3'b111;
  assign ld_post   = instr_i[6:0] == OPC_LOAD_PI && (!ld_regoff || instr_i[28]);
  assign ld_f      = ld_regoff ? instr_i[27:25] : instr_i[14:12];
  assign st_regoff = instr_i[6:0] == OPC_STORE_PI && instr_i[14];
  assign st_post   = instr_i[6:0] == OPC_STORE_PI && (!st_regoff || instr_i[28]);

  always_comb begin
    opcode = instr_i[6:0];
    funct3 = instr_i[14:12];
    funct7 = instr_i[31:25];
    rd     = instr_i[11:7];
    rs1    = instr_i[19:15];
    rs2    = instr_i[24:20];
    imm_i  = {{20{instr_i[31]}}, instr_i[31:20]};
    imm_s  = {{20{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
    imm_b  = {{19{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
    imm_u  = {instr_i[31:12], 12'd0};
    imm_j  = {{11{instr_i[31]}}, instr_i[31], instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};
    imm6   = {instr_i[25], instr_i[24:20]};
    vop    = vop_e'(instr_i[31:26]);

    dec_o = '0;
    dec_o.rega       = rs1;
    dec_o.regb       = rs2;
    dec_o.regc       = rd;
    dec_o.rf_waddr_a = rd;
    dec_o.opa_sel    = OPA_REG;
    dec_o.opb_sel    = OPB_REG;
    dec_o.alu_op     = ALU_ADD;
    dec_o.vec_mode   = VEC_32;
    dec_o.mul_op     = MUL_MUL;
    dec_o.div_op     = DIV_DIV;
    dec_o.csr_op     = CSR_NONE;
    dec_o.lsu_size   = LSU_WORD;
    dec_o.hwlp_op    = HWLP_STARTI;
    jump_imm_o       = imm_i;

    unique case (opcode)
      OPC_LUI: begin
        dec_o.alu_en = 1'b1; dec_o.rf_we_a = 1'b1;
        dec_o.opa_sel = OPA_ZERO; dec_o.opb_sel = OPB_IMM; dec_o.imm = imm_u;
      end
      OPC_AUIPC: begin
        dec_o.alu_en = 1'b1; dec_o.rf_we_a = 1'b1;
        dec_o.opa_sel = OPA_PC; dec_o.opb_sel = OPB_IMM; dec_o.imm = imm_u;
      end
      OPC_JAL: begin
        dec_o.jal = 1'b1; dec_o.alu_en = 1'b1; dec_o.rf_we_a = 1'b1;
        dec_o.opa_sel = OPA_PC; dec_o.opb_sel = OPB_PCINC;
        jump_imm_o = imm_j;
      end
      OPC_JALR: begin
        dec_o.jalr = 1'b1; dec_o.alu_en = 1'b1; dec_o.rf_we_a = 1'b1; dec_o.rega_used = 1'b1;
        dec_o.opa_sel = OPA_PC; dec_o.opb_sel = OPB_PCINC;
        jump_imm_o = imm_i;
        if (funct3 != 3'd0) dec_o.illegal = 1'b1;
      end
      OPC_BRANCH: begin
        dec_o.branch = 1'b1; dec_o.alu_en = 1'b1;
        dec_o.rega_used = 1'b1; dec_o.regb_used = 1'b1;
        jump_imm_o = imm_b;
        unique case (funct3)
          3'd0: dec_o.alu_op = ALU_EQ;
          3'd1: dec_o.alu_op = ALU_NE;
          3'd4: dec_o.alu_op = ALU_LT;
          3'd5: dec_o.alu_op = ALU_GE;
          3'd6: dec_o.alu_op = ALU_LTU;
          3'd7: dec_o.alu_op = ALU_GEU;
          default: dec_o.illegal = 1'b1;
        endcase
      end
      OPC_LOAD, OPC_LOAD_PI: begin
        dec_o.lsu_en = 1'b1; dec_o.rega_used = 1'b1;
        dec_o.imm = imm_i;
        dec_o.regb_used  = ld_regoff;
        dec_o.lsu_regoff = ld_regoff;
        dec_o.lsu_post   = ld_post;
        if (ld_regoff && funct7[6:4] != 3'd0) dec_o.illegal = 1'b1;
        if (ld_post) begin                       // rA += offset through port A
          dec_o.alu_en = 1'b1; dec_o.rf_we_a = 1'b1; dec_o.rf_waddr_a = rs1;
          dec_o.opb_sel = ld_regoff ? OPB_REG : OPB_IMM;
        end
        dec_o.lsu_signed = !ld_f[2];
        dec_o.lsu_size   = lsu_size_e'(ld_f[1:0]);
        if (ld_f[1:0] == 2'b11 || ld_f == 3'b110) dec_o.illegal = 1'b1;
      end
      OPC_STORE, OPC_STORE_PI: begin
        dec_o.lsu_en = 1'b1; dec_o.lsu_we = 1'b1;
        dec_o.rega_used = 1'b1; dec_o.regb_used = 1'b1;
        dec_o.imm = imm_s;
        dec_o.lsu_size = lsu_size_e'(funct3[1:0]);
        if (funct3[1:0] == 2'b11) dec_o.illegal = 1'b1;
        if (opcode == OPC_STORE) begin
          if (funct3[2]) dec_o.illegal = 1'b1;
        end else begin
          dec_o.regc_used  = st_regoff;          // register offset in rC (the rd field)
          dec_o.lsu_regoff = st_regoff;
          dec_o.lsu_post   = st_post;
          if (st_post) begin
            dec_o.alu_en = 1'b1; dec_o.rf_we_a = 1'b1; dec_o.rf_waddr_a = rs1;
            dec_o.opb_sel = st_regoff ? OPB_REGC : OPB_IMM;
          end
        end
      end
      OPC_OPIMM: begin
        dec_o.alu_en = 1'b1; dec_o.rf_we_a = 1'b1; dec_o.rega_used = 1'b1;
        dec_o.opb_sel = OPB_IMM; dec_o.imm = imm_i;
        unique case (funct3)
          3'd0: dec_o.alu_op = ALU_ADD;
          3'd1: begin dec_o.alu_op = ALU_SLL; if (funct7 != 7'd0) dec_o.illegal = 1'b1; end
          3'd2: dec_o.alu_op = ALU_SLT;
          3'd3: dec_o.alu_op = ALU_SLTU;
          3'd4: dec_o.alu_op = ALU_XOR;
          3'd5: begin
            dec_o.alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
            if ({funct7[6], funct7[4:0]} != 6'd0) dec_o.illegal = 1'b1;
          end
          3'd6: dec_o.alu_op = ALU_OR;
          default: dec_o.alu_op = ALU_AND;
        endcase
      end
      OPC_OP: begin
        dec_o.rf_we_a = 1'b1; dec_o.rega_used = 1'b1; dec_o.regb_used = 1'b1;
        unique case (funct7)
          7'h00, 7'h20: begin
            dec_o.alu_en = 1'b1;
            unique case (funct3)
              3'd0: dec_o.alu_op = funct7[5] ? ALU_SUB : ALU_ADD;
              3'd1: dec_o.alu_op = ALU_SLL;
              3'd2: dec_o.alu_op = ALU_SLT;
              3'd3: dec_o.alu_op = ALU_SLTU;
              3'd4: dec_o.alu_op = ALU_XOR;
              3'd5: dec_o.alu_op = funct7[5] ? ALU_SRA : ALU_SRL;
              3'd6: dec_o.alu_op = ALU_OR;
              default: dec_o.alu_op = ALU_AND;
            endcase
            if (funct7[5] && !(funct3 inside {3'd0, 3'd5})) dec_o.illegal = 1'b1;
          end
          7'h01: begin
            if (funct3[2]) begin
              dec_o.div_en = 1'b1;
              dec_o.div_op = div_op_e'(funct3[1:0]);
            end else begin
              dec_o.mul_en = 1'b1;
              unique case (funct3[1:0])
                2'd0: dec_o.mul_op = MUL_MUL;
                2'd1: dec_o.mul_op = MUL_MULH;
                2'd2: dec_o.mul_op = MUL_MULHSU;
                default: dec_o.mul_op = MUL_MULHU;
              endcase
            end
          end
          F7_PULP_ALU: begin
            dec_o.alu_en = 1'b1;
            unique case (funct3)
              3'd0: begin dec_o.alu_op = ALU_ABS; dec_o.regb_used = 1'b0; end
              3'd2: dec_o.alu_op = ALU_MIN;
              3'd3: dec_o.alu_op = ALU_MINU;
              3'd4: dec_o.alu_op = ALU_MAX;
              3'd5: dec_o.alu_op = ALU_MAXU;
              default: dec_o.illegal = 1'b1;
            endcase
          end
          F7_PULP_BIT: begin
            dec_o.alu_en = 1'b1; dec_o.regb_used = 1'b0;
            unique case (funct3)
              3'd0: dec_o.alu_op = ALU_FF1;
              3'd1: dec_o.alu_op = ALU_FL1;
              3'd2: dec_o.alu_op = ALU_CLB;
              3'd3: dec_o.alu_op = ALU_CNT;
              3'd4: dec_o.alu_op = ALU_EXTHS;
              3'd5: dec_o.alu_op = ALU_EXTHZ;
              3'd6: dec_o.alu_op = ALU_EXTBS;
              default: dec_o.alu_op = ALU_EXTBZ;
            endcase
          end
          F7_PULP_MAC: begin
            dec_o.mul_en = 1'b1; dec_o.regc_used = 1'b1;
            unique case (funct3)
              3'd0: dec_o.mul_op = MUL_MAC;
              3'd1: dec_o.mul_op = MUL_MSU;
              default: dec_o.illegal = 1'b1;
            endcase
          end
          default: dec_o.illegal = 1'b1;
        endcase
      end
      OPC_PULP: begin
        dec_o.rf_we_a = 1'b1; dec_o.rega_used = 1'b1;
        dec_o.bmask_a = instr_i[29:25];
        unique case (funct3)
          3'd0: begin                                    // p.{add,sub}[R]N rD, rA, rB, I
            dec_o.alu_en = 1'b1; dec_o.regb_used = 1'b1;
            unique case (instr_i[31:30])
              2'b00: dec_o.alu_op = ALU_ADDN;
              2'b01: dec_o.alu_op = ALU_SUBN;
              2'b10: dec_o.alu_op = ALU_ADDRN;
              default: dec_o.alu_op = ALU_SUBRN;
            endcase
          end
          3'd1, 3'd2, 3'd3, 3'd4: begin                  // p.mul / p.mac {s,u}[hh][R]N
            dec_o.mul_en = 1'b1; dec_o.regb_used = 1'b1; dec_o.mul_op = MUL_FRAC;
            dec_o.mul_signed_a = funct3 inside {3'd1, 3'd3};
            dec_o.mul_signed_b = funct3 inside {3'd1, 3'd3};
            dec_o.mul_acc      = funct3 inside {3'd3, 3'd4};
            dec_o.regc_used    = funct3 inside {3'd3, 3'd4};
            dec_o.mul_hh       = instr_i[30];
            dec_o.mul_round    = instr_i[31];
          end
          3'd5: begin                                    // p.clip[u] rD, rA, I
            dec_o.alu_en = 1'b1; dec_o.bmask_a = rs2;
            unique case (funct7)
              7'd0: dec_o.alu_op = ALU_CLIP;
              7'd1: dec_o.alu_op = ALU_CLIPU;
              default: dec_o.illegal = 1'b1;
            endcase
          end
          3'd6, 3'd7: begin                              // bit-field instructions
            dec_o.alu_en = 1'b1; dec_o.bmask_b = rs2;
            unique case ({funct3[0], instr_i[31:30]})
              3'b000: dec_o.alu_op = ALU_EXTRACT;
              3'b001: dec_o.alu_op = ALU_EXTRACTU;
              3'b010: begin dec_o.alu_op = ALU_INSERT; dec_o.regc_used = 1'b1; end
              3'b011: dec_o.alu_op = ALU_BCLR;
              3'b100: dec_o.alu_op = ALU_BSET;
              default: dec_o.illegal = 1'b1;
            endcase
          end
          default: dec_o.illegal = 1'b1;
        endcase
      end
      OPC_VECOP: begin
        dec_o.rf_we_a = 1'b1; dec_o.rega_used = 1'b1;
        dec_o.vec_mode = funct3[2] ? VEC_8 : VEC_16;
        dec_o.alu_en   = 1'b1;
        unique case (funct3[1:0])
          2'b00: begin dec_o.opb_sel = OPB_REG; dec_o.regb_used = 1'b1; end
          2'b01: begin dec_o.opb_sel = OPB_REPL; dec_o.regb_used = 1'b1; end
          2'b10: begin
            dec_o.opb_sel = OPB_IMM;
            dec_o.imm = funct3[2] ? {4{{2{imm6[5]}}, imm6}} : {2{{10{imm6[5]}}, imm6}};
          end
          default: dec_o.illegal = 1'b1;
        endcase
        dec_o.bmask_a = {3'd0, rs2[1:0]};                // lane of extract / insert
        unique case (vop)
          VOP_ADD:  dec_o.alu_op = ALU_ADD;
          VOP_SUB:  dec_o.alu_op = ALU_SUB;
          VOP_AVG:  dec_o.alu_op = ALU_AVG;
          VOP_AVGU: dec_o.alu_op = ALU_AVGU;
          VOP_MIN:  dec_o.alu_op = ALU_MIN;
          VOP_MINU: dec_o.alu_op = ALU_MINU;
          VOP_MAX:  dec_o.alu_op = ALU_MAX;
          VOP_MAXU: dec_o.alu_op = ALU_MAXU;
          VOP_SRL:  dec_o.alu_op = ALU_SRL;
          VOP_SRA:  dec_o.alu_op = ALU_SRA;
          VOP_SLL:  dec_o.alu_op = ALU_SLL;
          VOP_OR:   dec_o.alu_op = ALU_OR;
          VOP_XOR:  dec_o.alu_op = ALU_XOR;
          VOP_AND:  dec_o.alu_op = ALU_AND;
          VOP_ABS:  begin dec_o.alu_op = ALU_ABS; dec_o.regb_used = 1'b0; end
          VOP_EXTRACT, VOP_EXTRACTU, VOP_INSERT: begin
            dec_o.alu_op = (vop == VOP_EXTRACT) ? ALU_VEXT : (vop == VOP_EXTRACTU) ? ALU_VEXTU : ALU_VINS;
            dec_o.regc_used = vop == VOP_INSERT;
            if (funct3[1:0] != 2'b10) dec_o.illegal = 1'b1;
          end
          VOP_DOTUP, VOP_DOTUSP, VOP_DOTSP, VOP_SDOTUP, VOP_SDOTUSP, VOP_SDOTSP: begin
            dec_o.alu_en = 1'b0; dec_o.mul_en = 1'b1;
            dec_o.mul_op = funct3[2] ? MUL_DOT8 : MUL_DOT16;
            dec_o.mul_signed_a = vop inside {VOP_DOTSP, VOP_SDOTSP};
            dec_o.mul_signed_b = vop inside {VOP_DOTUSP, VOP_DOTSP, VOP_SDOTUSP, VOP_SDOTSP};
            dec_o.mul_acc      = vop inside {VOP_SDOTUP, VOP_SDOTUSP, VOP_SDOTSP};
            dec_o.regc_used    = dec_o.mul_acc;
          end
          VOP_SHUFFLE:  dec_o.alu_op = ALU_SHUF;
          VOP_SHUFFLE2: begin dec_o.alu_op = ALU_SHUF2; dec_o.regc_used = 1'b1; end
          VOP_PACK: begin
            dec_o.alu_op = funct3[2] ? ALU_PACKLO : ALU_PACK;
            dec_o.regc_used = funct3[2];
          end
          VOP_PACKHI: begin
            dec_o.alu_op = ALU_PACKHI; dec_o.regc_used = 1'b1;
            if (!funct3[2]) dec_o.illegal = 1'b1;
          end
          VOP_CMPEQ:  dec_o.alu_op = ALU_EQ;
          VOP_CMPNE:  dec_o.alu_op = ALU_NE;
          VOP_CMPGT:  dec_o.alu_op = ALU_GT;
          VOP_CMPGE:  dec_o.alu_op = ALU_GE;
          VOP_CMPLT:  dec_o.alu_op = ALU_LT;
          VOP_CMPLE:  dec_o.alu_op = ALU_LE;
          VOP_CMPGTU: dec_o.alu_op = ALU_GTU;
          VOP_CMPGEU: dec_o.alu_op = ALU_GEU;
          VOP_CMPLTU: dec_o.alu_op = ALU_LTU;
          VOP_CMPLEU: dec_o.alu_op = ALU_LEU;
          default: dec_o.illegal = 1'b1;
        endcase
      end
      OPC_HWLOOP: begin
        dec_o.hwlp_en  = 1'b1;
        dec_o.hwlp_set = instr_i[7];
        dec_o.hwlp_op  = hwlp_op_e'(funct3);
        dec_o.rega_used = funct3 inside {3'd2, 3'd4};
        if (funct3 > 3'd5 || instr_i[11:8] != 4'd0) dec_o.illegal = 1'b1;
      end
      OPC_SYSTEM: begin
        if (funct3 == 3'd0) begin
          unique case (instr_i[31:20])
            12'h000: dec_o.ecall  = 1'b1;
            12'h001: dec_o.ebreak = 1'b1;
            12'h302: dec_o.mret   = 1'b1;
            12'h105: ;                                   // wfi: no sleep state, executes as nop
            default: dec_o.illegal = 1'b1;
          endcase
        end else begin
          dec_o.csr_en  = 1'b1; dec_o.rf_we_a = 1'b1;
          dec_o.csr_imm = funct3[2];
          dec_o.rega_used = !funct3[2];
          unique case (funct3[1:0])
            2'd1: dec_o.csr_op = CSR_WRITE;
            2'd2: dec_o.csr_op = (rs1 == 5'd0) ? CSR_NONE : CSR_SET;
            2'd3: dec_o.csr_op = (rs1 == 5'd0) ? CSR_NONE : CSR_CLEAR;
            default: dec_o.illegal = 1'b1;
          endcase
        end
      end
      7'h0F: ;                                           // fence: nothing to order in this core
      default: dec_o.illegal = 1'b1;
    endcase

    if (illegal_c_i) dec_o.illegal = 1'b1;
    if (dec_o.illegal) begin                             // an illegal instruction does nothing but trap
      dec_o.rf_we_a = 1'b0; dec_o.alu_en = 1'b0; dec_o.mul_en = 1'b0; dec_o.div_en = 1'b0;
      dec_o.csr_en = 1'b0; dec_o.lsu_en = 1'b0; dec_o.branch = 1'b0; dec_o.jal = 1'b0;
      dec_o.jalr = 1'b0; dec_o.hwlp_en = 1'b0;
      dec_o.rega_used = 1'b0; dec_o.regb_used = 1'b0; dec_o.regc_used = 1'b0;
    end
    // the divider has its own operands; rf port A takes its result
    if (dec_o.rf_we_a && rd == 5'd0 && !dec_o.lsu_post) dec_o.rf_we_a = 1'b0;
  end

endmodule
