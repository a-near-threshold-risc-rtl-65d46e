// tb_alu: self-checking test of the vectorial ALU against a behavioural reference.
// Random operands exercise add/sub in 32b, 2x16b and 4x8b modes (no carry may cross a
// lane), add/sub with normalisation and rounding, min/max per lane, clip, the bit-field
// and counting instructions, branch comparisons and the byte shuffle, including the
// paper's shuffle example (mask 0x8D1). The ALU is combinational: results are sampled
// one time step after the operands change.
module tb_alu
  import riscv_pkg::*;
;
  alu_op_e op; vec_mode_e vm;
  logic [31:0] a, b, c, r;
  logic [4:0] ia, ib;
  logic cmp;
  int checks = 0, failures = 0;

  alu dut (.operator_i(op), .vec_mode_i(vm), .operand_a_i(a), .operand_b_i(b), .operand_c_i(c),
           .bmask_a_i(ia), .bmask_b_i(ib), .result_o(r), .cmp_result_o(cmp));

  initial begin : watchdog
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_r(logic [31:0] e, string what);
    #1; checks++;
    if (r !== e) begin failures++; $display("%s: a=%h b=%h I=%0d got %h expected %h", what, a, b, ia, r, e); end
  endtask

  function automatic logic [31:0] lanes(alu_op_e o, vec_mode_e m, logic [31:0] x, logic [31:0] y);
    logic [31:0] e;
    int w;
    w = (m == VEC_8) ? 8 : (m == VEC_16) ? 16 : 32;
    e = 0;
    for (int i = 0; i < 32 / w; i++) begin
      logic [31:0] xa, ya, s;
      xa = (x >> (w * i)) & ((w == 32) ? 32'hFFFF_FFFF : (32'd1 << w) - 1);
      ya = (y >> (w * i)) & ((w == 32) ? 32'hFFFF_FFFF : (32'd1 << w) - 1);
      // sign extend for signed compares
      case (o)
        ALU_ADD: s = xa + ya;
        ALU_SUB: s = xa - ya;
        ALU_MAX: s = ($signed(xa << (32 - w)) > $signed(ya << (32 - w))) ? xa : ya;
        ALU_MINU: s = (xa < ya) ? xa : ya;
        default: s = 0;
      endcase
      e = e | ((s & ((w == 32) ? 32'hFFFF_FFFF : (32'd1 << w) - 1)) << (w * i));
    end
    return e;
  endfunction

  initial begin
    c = 0; ia = 0; ib = 0;
    for (int t = 0; t < 3000; t++) begin
      a = $urandom; b = $urandom; c = $urandom;
      vm = vec_mode_e'(t % 3);
      op = ALU_ADD;  expect_r(lanes(ALU_ADD, vm, a, b), "add");
      op = ALU_SUB;  expect_r(lanes(ALU_SUB, vm, a, b), "sub");
      op = ALU_MAX;  expect_r(lanes(ALU_MAX, vm, a, b), "max");
      op = ALU_MINU; expect_r(lanes(ALU_MINU, vm, a, b), "minu");
      vm = VEC_32;
      ia = 5'($urandom);
      op = ALU_ADDN;  expect_r(32'($signed(a + b) >>> ia), "addN");
      op = ALU_ADDRN; expect_r(32'($signed(a + b + ((ia == 0) ? 32'd0 : 32'd1 << (ia - 1))) >>> ia), "addRN");
      op = ALU_SUBRN; expect_r(32'($signed(a - b + ((ia == 0) ? 32'd0 : 32'd1 << (ia - 1))) >>> ia), "subRN");
      begin
        logic signed [31:0] hi, lo;
        a = $signed(a) >>> ($urandom % 32);
        if (ia == 0) ia = 5'd1;     // I = 0 gives no range
        hi = (ia == 0) ? 0 : (32'sd1 <<< (ia - 1)) - 1;
        lo = (ia == 0) ? 0 : -(32'sd1 <<< (ia - 1));
        op = ALU_CLIP; expect_r(($signed(a) > hi) ? hi : ($signed(a) < lo) ? lo : a, "clip");
        lo = 0;
        op = ALU_CLIPU; expect_r(($signed(a) > hi) ? hi : ($signed(a) < lo) ? lo : a, "clipu");
      end
      ib = 5'($urandom);
      op = ALU_EXTRACTU; expect_r((a >> ib) & ((ia == 31) ? 32'hFFFF_FFFF : (32'd1 << (ia + 1)) - 1), "extractu");
      op = ALU_CNT; expect_r($countones(a), "cnt");
      op = ALU_SLTU; expect_r({31'd0, a < b}, "sltu");
      op = ALU_LT; #1; checks++; if (cmp !== ($signed(a) < $signed(b))) failures++;
      op = ALU_GEU; #1; checks++; if (cmp !== (a >= b)) failures++;
      // byte shuffle: random per-byte indices into operand a
      begin
        logic [31:0] e; logic [11:0] m;
        m = 12'($urandom); b = {20'd0, m}; vm = VEC_8;
        for (int i = 0; i < 4; i++) e[8*i +: 8] = a[8*m[3*i +: 2] +: 8];
        op = ALU_SHUF; expect_r(e, "shuffle");
        for (int i = 0; i < 4; i++) e[8*i +: 8] = m[3*i+2] ? a[8*m[3*i +: 2] +: 8] : c[8*m[3*i +: 2] +: 8];
        op = ALU_SHUF2; expect_r(e, "shuffle2");
      end
    end
    // the paper's example: shuffle2 with mask 0x8D1 picks c[1], c[2], c[3], a[0] (byte 0 first)
    a = 32'hA3A2_A1A0; c = 32'hC3C2_C1C0; b = 32'h0000_08D1; vm = VEC_8; op = ALU_SHUF2;
    expect_r(32'hA0C3_C2C1, "shuffle2 0x8D1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
