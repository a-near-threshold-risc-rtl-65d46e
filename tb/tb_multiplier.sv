// tb_multiplier: self-checking test of the multiplier against behavioural references.
// Random operands check mul/mulh/mulhsu/mulhu, mac and msu, the signed fractional
// 16x16 product with normalisation and rounding, and the signed and unsigned 16b and 8b
// dot products with and without accumulation (sdotp). Every operation is single cycle and
// combinational, so results are sampled one time step after the operands change.
module tb_multiplier
  import riscv_pkg::*;
;
  mul_op_e op;
  logic sa, sb, hh, rnd, acc;
  logic [4:0] sh;
  logic [31:0] a, b, c, r;
  int checks = 0, failures = 0;

  multiplier dut (.mul_op_i(op), .signed_a_i(sa), .signed_b_i(sb), .hh_i(hh), .round_i(rnd),
    .acc_i(acc), .shift_i(sh), .mult_operand_a_i(a), .mult_operand_b_i(b), .mult_operand_c_i(c),
    .dot_operand_a_i(a), .dot_operand_b_i(b), .dot_operand_c_i(c), .mult_result_o(r));

  initial begin : watchdog
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_r(logic [31:0] e, string what);
    #1; checks++;
    if (r !== e) begin failures++; $display("%s: a=%h b=%h c=%h got %h expected %h", what, a, b, c, r, e); end
  endtask

  initial begin
    sa = 0; sb = 0; hh = 0; rnd = 0; acc = 0; sh = 0;
    for (int t = 0; t < 3000; t++) begin
      longint pa, pb;
      a = $urandom; b = $urandom; c = $urandom;
      sa = 0; sb = 0; acc = 0; rnd = 0; hh = 0; sh = 0;
      op = MUL_MUL;    expect_r(a * b, "mul");
      op = MUL_MULH;   pa = longint'($signed(a)); pb = longint'($signed(b)); expect_r(32'((pa * pb) >>> 32), "mulh");
      op = MUL_MULHU;  expect_r(32'(({32'd0, a} * {32'd0, b}) >> 32), "mulhu");
      op = MUL_MULHSU; pb = longint'({32'd0, b}); expect_r(32'((pa * pb) >>> 32), "mulhsu");
      op = MUL_MAC;    expect_r(c + a * b, "mac");
      op = MUL_MSU;    expect_r(c - a * b, "msu");
      // fractional: p.mulsRN
      op = MUL_FRAC; sa = 1; sb = 1; sh = 5'($urandom); rnd = 1; hh = 1'($urandom);
      begin
        longint fa, fb, p;
        fa = hh ? longint'($signed(a[31:16])) : longint'($signed(a[15:0]));
        fb = hh ? longint'($signed(b[31:16])) : longint'($signed(b[15:0]));
        p = fa * fb + ((sh == 0) ? 0 : (longint'(1) << (sh - 1)));
        expect_r(32'(p >>> sh), "mulsRN");
      end
      hh = 0; rnd = 0;
      // dot products
      sa = 1'($urandom); sb = sa; acc = 1'($urandom);
      begin
        longint s16, s8;
        s16 = 0; s8 = 0;
        for (int i = 0; i < 2; i++)
          s16 += (sa ? longint'($signed(a[16*i +: 16])) : longint'(a[16*i +: 16])) *
                 (sb ? longint'($signed(b[16*i +: 16])) : longint'(b[16*i +: 16]));
        for (int i = 0; i < 4; i++)
          s8 += (sa ? longint'($signed(a[8*i +: 8])) : longint'(a[8*i +: 8])) *
                (sb ? longint'($signed(b[8*i +: 8])) : longint'(b[8*i +: 8]));
        op = MUL_DOT16; expect_r(32'(s16) + (acc ? c : 0), "dotp16");
        op = MUL_DOT8;  expect_r(32'(s8) + (acc ? c : 0), "dotp8");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
