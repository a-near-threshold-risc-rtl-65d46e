// riscv_core: four-stage RV32IMC core with DSP extensions for a shared-memory cluster.
//
// Pipeline (IF, ID, EX, WB), as in the paper:
// - IF: the L0 prefetch buffer takes 128b lines from the shared instruction cache and
//   hands out 16/32b instructions, also across line boundaries; the compressed decoder
//   expands RVC; the hardware-loop controller jumps back to the loop start when the
//   loop-end instruction leaves the buffer, so loop iterations cost no instruction.
// - ID: decoder, the three-read-port register file, forwarding from EX (port A result)
//   and from WB (load data), jumps, traps, mret and the lp.* instructions, which write
//   the hardware-loop registers here.
// - EX: ALU, multiplier (integer, fractional, dot products), iterative divider, CSR
//   unit and the request phase of the LSU; branches are resolved here. Each unit has its
//   own operand registers, loaded only when the issued instruction uses that unit and
//   otherwise held, so idle units see no switching (the paper's clock-gated operand
//   registers; here as enabled flip-flops). ALU, multiplier, divider and CSR results
//   and the updated pointer of post-increment accesses are written through register
//   file port A at the end of EX.
// - WB: the data of a load arrives and is written through port B.
// The data interface therefore has one full cycle for the request (EX) and one for the
// answer (WB); the instruction interface has one cycle from request to line.
//
// Interfaces: instr_* to the shared I$ (req/gnt/rvalid, 128b lines), data_* to the
// cluster's data demultiplexer (req/gnt/rvalid, 32b), fetch_enable_i starts fetching at
// boot_addr_i, dbg_halt_i stops issue (the debug unit itself is not part of this
// design), events_o flags per-cycle events for performance counting. Traps (illegal
// instruction, ecall, ebreak) go to mtvec; there are no interrupts. The divider's busy
// output is left open: the core tracks the division by its own start and valid pulses.
module riscv_core
  import riscv_pkg::*;
(
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [3:0]   hart_id_i,
  input  logic [31:0]  boot_addr_i,
  input  logic         fetch_enable_i,
  input  logic         dbg_halt_i,
  // instruction cache
  output logic         instr_req_o,
  output logic [31:0]  instr_addr_o,
  input  logic         instr_gnt_i,
  input  logic         instr_rvalid_i,
  input  logic [127:0] instr_rdata_i,
  // data memory
  output logic         data_req_o,
  output logic [31:0]  data_addr_o,
  output logic         data_we_o,
  output logic [3:0]   data_be_o,
  output logic [31:0]  data_wdata_o,
  input  logic         data_gnt_i,
  input  logic         data_rvalid_i,
  input  logic [31:0]  data_rdata_i,
  output core_events_t events_o
);

  // ================================================================ control wires
  logic        load_use, ex_advance, id_issue, if_ready, redirect, redirect_ex, pf_ready;
  logic        branch_taken, wb_wait, ex_unit_ready;
  logic [31:0] redirect_addr;

  // ================================================================ IF
  logic        pf_valid, pf_cross;
  logic [31:0] pf_rdata, pf_addr;
  logic        hwlp_jump;
  logic [31:0] hwlp_target;
  logic [31:0] if_instr;
  logic        if_is_c, if_illegal_c, if_take;

  prefetch_buffer #(.LINE_W(128)) u_prefetch (
    .clk_i, .rst_ni,
    .req_i          (fetch_enable_i),
    .boot_addr_i,
    .branch_i       (redirect),
    .branch_addr_i  (redirect_addr),
    .hwlp_jump_i    (hwlp_jump),
    .hwlp_target_i  (hwlp_target),
    .ready_i        (pf_ready),
    .valid_o        (pf_valid),
    .rdata_o        (pf_rdata),
    .addr_o         (pf_addr),
    .instr_req_o, .instr_addr_o, .instr_gnt_i, .instr_rvalid_i, .instr_rdata_i,
    .cross_o        (pf_cross)
  );

  compressed_decoder u_cdec (
    .instr_i         (pf_rdata),
    .instr_o         (if_instr),
    .is_compressed_o (if_is_c),
    .illegal_o       (if_illegal_c)
  );

  assign if_take = pf_valid && pf_ready && !redirect;

  // IF/ID register
  logic        id_valid_q, id_is_c_q, id_illegal_c_q;
  logic [31:0] id_instr_q, id_pc_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      id_valid_q     <= 1'b0;
      id_is_c_q      <= 1'b0;
      id_illegal_c_q <= 1'b0;
      id_instr_q     <= 32'h0000_0013;
      id_pc_q        <= '0;
    end else if (redirect) begin
      id_valid_q <= 1'b0;
    end else if (if_ready) begin
      id_valid_q <= if_take;
      if (if_take) begin
        id_instr_q     <= if_instr;
        id_pc_q        <= pf_addr;
        id_is_c_q      <= if_is_c;
        id_illegal_c_q <= if_illegal_c;
      end
    end
  end

  // ================================================================ ID
  dec_t        dec;
  logic [31:0] jump_imm;
  decoder u_dec (.instr_i(id_instr_q), .illegal_c_i(id_illegal_c_q), .dec_o(dec), .jump_imm_o(jump_imm));

  logic [31:0] rf_a, rf_b, rf_c;
  logic        rf_we_a, rf_we_b;
  logic [4:0]  rf_waddr_a, rf_waddr_b;
  logic [31:0] rf_wdata_a, rf_wdata_b;

  register_file #(.NREGS(32)) u_rf (
    .clk_i, .rst_ni,
    .raddr_a_i(dec.rega), .rdata_a_o(rf_a),
    .raddr_b_i(dec.regb), .rdata_b_o(rf_b),
    .raddr_c_i(dec.regc), .rdata_c_o(rf_c),
    .we_a_i(rf_we_a), .waddr_a_i(rf_waddr_a), .wdata_a_i(rf_wdata_a),
    .we_b_i(rf_we_b), .waddr_b_i(rf_waddr_b), .wdata_b_i(rf_wdata_b)
  );

  // forwarding: EX result (port A) first, it is younger than the load in WB
  function automatic logic [31:0] fwd(logic [4:0] r, logic [31:0] rf_val,
                                      logic wa, logic [4:0] aa, logic [31:0] da,
                                      logic wb, logic [4:0] ab, logic [31:0] db);
    if (r == 5'd0)            return 32'd0;
    else if (wa && aa == r)   return da;
    else if (wb && ab == r)   return db;
    else                      return rf_val;
  endfunction

  logic [31:0] op_ra, op_rb, op_rc;
  logic [31:0] id_opa, id_opb;
  logic        id_trap, id_redirect;
  logic [4:0]  id_trap_cause;
  logic [31:0] mtvec, mepc;
  logic        ex_fwd_we;
  logic [4:0]  ex_fwd_addr;
  logic [31:0] ex_result;
  logic [31:0] ex_branch_target_q;

  always_comb begin
    op_ra = fwd(dec.rega, rf_a, ex_fwd_we, ex_fwd_addr, ex_result, rf_we_b, rf_waddr_b, rf_wdata_b);
    op_rb = fwd(dec.regb, rf_b, ex_fwd_we, ex_fwd_addr, ex_result, rf_we_b, rf_waddr_b, rf_wdata_b);
    op_rc = fwd(dec.regc, rf_c, ex_fwd_we, ex_fwd_addr, ex_result, rf_we_b, rf_waddr_b, rf_wdata_b);
    unique case (dec.opa_sel)
      OPA_PC:   id_opa = id_pc_q;
      OPA_ZERO: id_opa = 32'd0;
      default:  id_opa = op_ra;
    endcase
    unique case (dec.opb_sel)
      OPB_IMM:   id_opb = dec.imm;
      OPB_PCINC: id_opb = id_is_c_q ? 32'd2 : 32'd4;
      OPB_REPL:  id_opb = (dec.vec_mode == VEC_8) ? {4{op_rb[7:0]}} : {2{op_rb[15:0]}};
      OPB_REGC:  id_opb = op_rc;
      default:   id_opb = op_rb;
    endcase
    id_trap       = dec.illegal || dec.ecall || dec.ebreak;
    id_trap_cause = dec.illegal ? EXC_ILLEGAL : dec.ebreak ? EXC_BREAK : EXC_ECALL;
    id_redirect   = dec.jal || dec.jalr || id_trap || dec.mret;
    if (id_trap)        redirect_addr = mtvec;
    else if (dec.mret)  redirect_addr = mepc;
    else if (dec.jalr)  redirect_addr = (op_ra + jump_imm) & ~32'd1;
    else                redirect_addr = id_pc_q + jump_imm;
    if (redirect_ex)    redirect_addr = ex_branch_target_q;
  end

  // hardware loop setup values (lp.* in ID)
  logic [2:0]  hwlp_mask;
  logic [31:0] hwlp_start_v, hwlp_end_v, hwlp_count_v;
  logic [31:0] uimm12x2, uimm5x2;
  always_comb begin
    uimm12x2     = {19'd0, id_instr_q[31:20], 1'b0};
    uimm5x2      = {26'd0, id_instr_q[19:15], 1'b0};
    hwlp_start_v = id_pc_q + 32'd4;
    hwlp_end_v   = id_pc_q + uimm12x2;
    hwlp_count_v = op_ra;
    unique case (dec.hwlp_op)
      HWLP_STARTI: begin hwlp_mask = 3'b001; hwlp_start_v = id_pc_q + uimm12x2; end
      HWLP_ENDI:   hwlp_mask = 3'b010;
      HWLP_COUNT:  hwlp_mask = 3'b100;
      HWLP_COUNTI: begin hwlp_mask = 3'b100; hwlp_count_v = {20'd0, id_instr_q[31:20]}; end
      HWLP_SETUP:  hwlp_mask = 3'b111;
      default: begin       // lp.setupi: count from the 12b immediate, end from the 5b one
        hwlp_mask    = 3'b111;
        hwlp_count_v = {20'd0, id_instr_q[31:20]};
        hwlp_end_v   = id_pc_q + uimm5x2;
      end
    endcase
  end

  logic [31:0] hwlp_start [2], hwlp_end [2], hwlp_count [2];
  logic        csr_hwlp_we, csr_hwlp_set;
  logic [1:0]  csr_hwlp_reg;
  logic [31:0] csr_hwlp_wdata;

  hwloop_unit #(.N_SETS(2)) u_hwloop (
    .clk_i, .rst_ni,
    .we_i        (id_issue && dec.hwlp_en),
    .set_i       (dec.hwlp_set),
    .we_mask_i   (hwlp_mask),
    .start_i     (hwlp_start_v),
    .end_i       (hwlp_end_v),
    .count_i     (hwlp_count_v),
    .csr_we_i    (csr_hwlp_we),
    .csr_set_i   (csr_hwlp_set),
    .csr_reg_i   (csr_hwlp_reg),
    .csr_wdata_i (csr_hwlp_wdata),
    .start_o     (hwlp_start),
    .end_o       (hwlp_end),
    .count_o     (hwlp_count),
    .pc_i        (pf_addr),
    .take_i      (if_take),
    .jump_o      (hwlp_jump),
    .target_o    (hwlp_target)
  );

  // ================================================================ ID/EX registers
  logic        ex_valid_q, ex_rf_we_a_q, ex_mul_en_q, ex_div_en_q, ex_csr_en_q;
  logic        ex_lsu_en_q, ex_lsu_we_q, ex_lsu_signed_q, ex_lsu_post_q, ex_branch_q;
  logic [4:0]  ex_waddr_a_q, ex_waddr_b_q;
  alu_op_e     ex_alu_op_q;
  vec_mode_e   ex_vec_mode_q;
  logic [4:0]  ex_bmask_a_q, ex_bmask_b_q;
  mul_op_e     ex_mul_op_q;
  logic        ex_mul_sa_q, ex_mul_sb_q, ex_mul_hh_q, ex_mul_round_q, ex_mul_acc_q;
  div_op_e     ex_div_op_q;
  logic        ex_div_start_q;
  csr_op_e     ex_csr_op_q;
  logic [11:0] ex_csr_addr_q;
  lsu_size_e   ex_lsu_size_q;
  // per-unit operand registers
  logic [31:0] alu_a_q, alu_b_q, alu_c_q;
  logic [31:0] mult_a_q, mult_b_q, mult_c_q;
  logic [31:0] dot_a_q, dot_b_q, dot_c_q;
  logic [31:0] lsu_base_q, lsu_off_q, lsu_wdata_q, csr_wdata_q;

  logic use_dot;
  assign use_dot = dec.mul_op inside {MUL_DOT16, MUL_DOT8};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ex_valid_q <= 1'b0; ex_rf_we_a_q <= 1'b0; ex_mul_en_q <= 1'b0;
      ex_div_en_q <= 1'b0; ex_csr_en_q <= 1'b0; ex_lsu_en_q <= 1'b0; ex_lsu_we_q <= 1'b0;
      ex_lsu_signed_q <= 1'b0; ex_lsu_post_q <= 1'b0; ex_branch_q <= 1'b0;
      ex_waddr_a_q <= '0; ex_waddr_b_q <= '0; ex_branch_target_q <= '0;
      ex_alu_op_q <= ALU_ADD; ex_vec_mode_q <= VEC_32; ex_bmask_a_q <= '0; ex_bmask_b_q <= '0;
      ex_mul_op_q <= MUL_MUL; ex_mul_sa_q <= 1'b0; ex_mul_sb_q <= 1'b0; ex_mul_hh_q <= 1'b0;
      ex_mul_round_q <= 1'b0; ex_mul_acc_q <= 1'b0; ex_div_op_q <= DIV_DIV; ex_div_start_q <= 1'b0;
      ex_csr_op_q <= CSR_NONE; ex_csr_addr_q <= '0; ex_lsu_size_q <= LSU_WORD;
      alu_a_q <= '0; alu_b_q <= '0; alu_c_q <= '0;
      mult_a_q <= '0; mult_b_q <= '0; mult_c_q <= '0;
      dot_a_q <= '0; dot_b_q <= '0; dot_c_q <= '0;
      lsu_base_q <= '0; lsu_off_q <= '0; lsu_wdata_q <= '0; csr_wdata_q <= '0;
    end else begin
      ex_div_start_q <= 1'b0;
      if (ex_advance) begin
        ex_valid_q <= id_issue;
        if (id_issue) begin
          ex_rf_we_a_q    <= dec.rf_we_a;
          ex_waddr_a_q    <= dec.rf_waddr_a;
          ex_waddr_b_q    <= id_instr_q[11:7];
          ex_mul_en_q     <= dec.mul_en;
          ex_div_en_q     <= dec.div_en;
          ex_csr_en_q     <= dec.csr_en;
          ex_lsu_en_q     <= dec.lsu_en;
          ex_branch_q     <= dec.branch;
          ex_branch_target_q <= id_pc_q + jump_imm;
          ex_div_start_q  <= dec.div_en;
          if (dec.alu_en || dec.div_en) begin
            ex_alu_op_q   <= dec.alu_op;
            ex_vec_mode_q <= dec.vec_mode;
            ex_bmask_a_q  <= dec.bmask_a;
            ex_bmask_b_q  <= dec.bmask_b;
            ex_div_op_q   <= dec.div_op;
            alu_a_q       <= id_opa;
            alu_b_q       <= id_opb;
            alu_c_q       <= op_rc;
          end
          if (dec.mul_en) begin
            ex_mul_op_q    <= dec.mul_op;
            ex_mul_sa_q    <= dec.mul_signed_a;
            ex_mul_sb_q    <= dec.mul_signed_b;
            ex_mul_hh_q    <= dec.mul_hh;
            ex_mul_round_q <= dec.mul_round;
            ex_mul_acc_q   <= dec.mul_acc;
            ex_bmask_a_q   <= dec.bmask_a;
            if (use_dot) begin
              dot_a_q <= id_opa; dot_b_q <= id_opb; dot_c_q <= op_rc;
            end else begin
              mult_a_q <= op_ra; mult_b_q <= op_rb; mult_c_q <= op_rc;
            end
          end
          if (dec.lsu_en) begin
            ex_lsu_we_q     <= dec.lsu_we;
            ex_lsu_signed_q <= dec.lsu_signed;
            ex_lsu_post_q   <= dec.lsu_post;
            ex_lsu_size_q   <= dec.lsu_size;
            lsu_base_q      <= op_ra;
            lsu_off_q       <= dec.lsu_regoff ? (dec.lsu_we ? op_rc : op_rb) : dec.imm;
            lsu_wdata_q     <= op_rb;
          end
          if (dec.csr_en) begin
            ex_csr_op_q   <= dec.csr_op;
            ex_csr_addr_q <= id_instr_q[31:20];
            csr_wdata_q   <= dec.csr_imm ? {27'd0, id_instr_q[19:15]} : op_ra;
          end
        end
      end
    end
  end

  // ================================================================ EX
  logic [31:0] alu_result, mult_result, div_result, csr_rdata;
  logic        alu_cmp, div_valid;

  alu u_alu (
    .operator_i(ex_alu_op_q), .vec_mode_i(ex_vec_mode_q),
    .operand_a_i(alu_a_q), .operand_b_i(alu_b_q), .operand_c_i(alu_c_q),
    .bmask_a_i(ex_bmask_a_q), .bmask_b_i(ex_bmask_b_q),
    .result_o(alu_result), .cmp_result_o(alu_cmp)
  );

  multiplier u_mult (
    .mul_op_i(ex_mul_op_q), .signed_a_i(ex_mul_sa_q), .signed_b_i(ex_mul_sb_q),
    .hh_i(ex_mul_hh_q), .round_i(ex_mul_round_q), .acc_i(ex_mul_acc_q), .shift_i(ex_bmask_a_q),
    .mult_operand_a_i(mult_a_q), .mult_operand_b_i(mult_b_q), .mult_operand_c_i(mult_c_q),
    .dot_operand_a_i(dot_a_q), .dot_operand_b_i(dot_b_q), .dot_operand_c_i(dot_c_q),
    .mult_result_o(mult_result)
  );

  divider #(.WIDTH(32)) u_div (
    .clk_i, .rst_ni,
    .start_i(ex_div_start_q), .op_i(ex_div_op_q),
    .dividend_i(alu_a_q), .divisor_i(alu_b_q),
    .busy_o(), .valid_o(div_valid), .result_o(div_result)
  );

  logic ex_sys;
  assign ex_sys = id_issue && (id_trap || dec.mret);

  csr u_csr (
    .clk_i, .rst_ni, .hart_id_i,
    .en_i(ex_valid_q && ex_csr_en_q && ex_advance), .op_i(ex_csr_op_q), .addr_i(ex_csr_addr_q),
    .wdata_i(csr_wdata_q), .rdata_o(csr_rdata),
    .trap_i(id_issue && id_trap), .trap_pc_i(id_pc_q), .trap_cause_i(id_trap_cause),
    .mret_i(id_issue && dec.mret), .mtvec_o(mtvec), .mepc_o(mepc),
    .instret_i(ex_valid_q && ex_advance),
    .hwlp_start_i(hwlp_start), .hwlp_end_i(hwlp_end), .hwlp_count_i(hwlp_count),
    .hwlp_we_o(csr_hwlp_we), .hwlp_set_o(csr_hwlp_set), .hwlp_reg_o(csr_hwlp_reg),
    .hwlp_wdata_o(csr_hwlp_wdata)
  );

  // LSU
  logic        lsu_ex_ready, lsu_rvalid, lsu_misaligned;
  logic [31:0] lsu_rdata, lsu_addr;
  logic        wb_load_q;
  logic [4:0]  wb_waddr_q;
  assign lsu_addr = lsu_base_q + (ex_lsu_post_q ? 32'd0 : lsu_off_q);

  lsu u_lsu (
    .clk_i, .rst_ni,
    .req_i(ex_valid_q && ex_lsu_en_q), .we_i(ex_lsu_we_q), .size_i(ex_lsu_size_q),
    .signed_i(ex_lsu_signed_q), .addr_i(lsu_addr), .wdata_i(lsu_wdata_q),
    .ex_ready_o(lsu_ex_ready), .misaligned_o(lsu_misaligned),
    .rvalid_o(lsu_rvalid), .rdata_o(lsu_rdata), .wb_wait_o(wb_wait),
    .data_req_o, .data_addr_o, .data_we_o, .data_be_o, .data_wdata_o,
    .data_gnt_i, .data_rvalid_i, .data_rdata_i
  );

  always_comb begin
    ex_unit_ready = 1'b1;
    if (ex_valid_q && ex_div_en_q && !div_valid) ex_unit_ready = 1'b0;
    if (ex_valid_q && ex_lsu_en_q && !lsu_ex_ready) ex_unit_ready = 1'b0;
    if (ex_div_en_q)      ex_result = div_result;
    else if (ex_mul_en_q) ex_result = mult_result;
    else if (ex_csr_en_q) ex_result = csr_rdata;
    else                  ex_result = alu_result;
    branch_taken = ex_valid_q && ex_branch_q && alu_cmp && !wb_wait;
    ex_fwd_we    = ex_valid_q && ex_rf_we_a_q;
    ex_fwd_addr  = ex_waddr_a_q;
    rf_we_a      = ex_valid_q && ex_rf_we_a_q && ex_unit_ready && !wb_wait;
    rf_waddr_a   = ex_waddr_a_q;
    rf_wdata_a   = ex_result;
    rf_we_b      = lsu_rvalid && wb_load_q;
    rf_waddr_b   = wb_waddr_q;
    rf_wdata_b   = lsu_rdata;
  end

  // EX/WB: destination of the load in flight
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wb_load_q  <= 1'b0;
      wb_waddr_q <= '0;
    end else if (lsu_ex_ready) begin
      wb_load_q  <= !ex_lsu_we_q;
      wb_waddr_q <= ex_waddr_b_q;
    end
  end

  // ================================================================ controller
  controller u_ctrl (
    .id_valid_i(id_valid_q),
    .rega_used_i(dec.rega_used), .regb_used_i(dec.regb_used), .regc_used_i(dec.regc_used),
    .rega_i(dec.rega), .regb_i(dec.regb), .regc_i(dec.regc),
    .id_redirect_i(id_redirect), .id_sys_i(id_trap || dec.mret),
    .ex_valid_i(ex_valid_q), .ex_load_i(ex_lsu_en_q && !ex_lsu_we_q), .ex_load_rd_i(ex_waddr_b_q),
    .ex_csr_i(ex_csr_en_q), .ex_unit_ready_i(ex_unit_ready), .branch_taken_i(branch_taken),
    .wb_wait_i(wb_wait), .dbg_halt_i,
    .load_use_o(load_use), .ex_advance_o(ex_advance), .id_issue_o(id_issue),
    .if_ready_o(if_ready), .redirect_o(redirect), .redirect_ex_o(redirect_ex), .pf_ready_o(pf_ready)
  );

  // ================================================================ events
  always_comb begin
    events_o = '0;
    events_o.instr_retired  = ex_valid_q && ex_advance;
    events_o.compressed     = if_take && if_is_c;
    events_o.load_use_stall = id_valid_q && load_use;
    events_o.ex_stall       = ex_valid_q && !ex_unit_ready;
    events_o.wb_stall       = wb_wait;
    events_o.fetch_stall    = !id_valid_q && fetch_enable_i && !dbg_halt_i;
    events_o.branch_taken   = branch_taken;
    events_o.jump           = id_issue && (dec.jal || dec.jalr);
    events_o.hwlp_jump      = if_take && hwlp_jump;
    events_o.misaligned     = lsu_misaligned;
    events_o.line_cross     = pf_cross && !redirect;
    events_o.trap           = ex_sys && id_trap;
  end

  // a store or load never sits in EX while its own earlier request is still unanswered
  a_one_outstanding: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(data_req_o && wb_wait));

endmodule
