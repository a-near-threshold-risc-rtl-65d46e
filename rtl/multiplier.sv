// multiplier: the multiply unit of the EX stage, with its three parts from the paper.
//
// (1) Fractional multiplier: one 16b half of each operand (the upper halves for the
//     "hh" forms), sign- or zero-extended to 17b, multiplied; the product, an optional
//     32b accumulator (p.mac*N) and the rounding constant 2^(I-1) (the R forms) are summed
//     in a 3:1 adder and the 34b sum is shifted right by I, arithmetically for signed
//     and logically for unsigned operations (p.mul{s,u}[hh][R]N, p.mac{s,u}[hh][R]N).
// (2) 32x32 integer multiplier: mul, the mulh/mulhsu/mulhu high words, and
//     multiply-accumulate / multiply-subtract into a 32b register (p.mac, p.msu).
// (3,4) Dot-product units on their own operand inputs: two 17x17 products with a 3:1
//     adder for halfword vectors and four 9x9 products with a 5:1 adder for byte vectors,
//     optionally adding the accumulator operand (sdotp). Signedness of each operand is
//     chosen by mul_signed_a/b (dotup, dotusp, dotsp).
//
// Everything completes in one cycle. The paper's figure shows a small multi-cycle FSM
// that steps the 17x17 array through halves, which it uses for the high-word products;
// this design instead computes mulh* with a single 33x33 product, a simplification of its
// own. The result multiplexer follows mul_op_i. Purely combinational.
module multiplier
  import riscv_pkg::*;
(
  input  mul_op_e     mul_op_i,
  input  logic        signed_a_i,
  input  logic        signed_b_i,
  input  logic        hh_i,          // fractional: take upper halves
  input  logic        round_i,       // fractional: add 2^(I-1) before the shift
  input  logic        acc_i,         // fractional / dot: add operand c
  input  logic [4:0]  shift_i,       // normalisation amount I
  input  logic [31:0] mult_operand_a_i,
  input  logic [31:0] mult_operand_b_i,
  input  logic [31:0] mult_operand_c_i,
  input  logic [31:0] dot_operand_a_i,
  input  logic [31:0] dot_operand_b_i,
  input  logic [31:0] dot_operand_c_i,
  output logic [31:0] mult_result_o
);

  // ------------------------------------------------------------ (1) fractional
  logic [15:0]        fa, fb;
  logic signed [16:0] fa17, fb17;
  logic signed [33:0] fprod, fsum, fround;
  logic [33:0]        fshift;
  always_comb begin
    fa     = hh_i ? mult_operand_a_i[31:16] : mult_operand_a_i[15:0];
    fb     = hh_i ? mult_operand_b_i[31:16] : mult_operand_b_i[15:0];
    fa17   = {signed_a_i & fa[15], fa};
    fb17   = {signed_b_i & fb[15], fb};
    fprod  = 34'(fa17 * fb17);
    fround = (round_i && shift_i != 5'd0) ? (34'sd1 <<< (shift_i - 5'd1)) : 34'sd0;
    fsum   = fprod + fround + (acc_i ? 34'($signed(mult_operand_c_i)) : 34'sd0);
    fshift = signed_a_i ? 34'(fsum >>> shift_i) : 34'($unsigned(fsum) >> shift_i);
  end

  // ------------------------------------------------------------ (2) 32x32
  logic signed [32:0] ia33, ib33;
  logic signed [65:0] iprod;
  logic [31:0]        int_res;
  always_comb begin
    ia33  = {(mul_op_i inside {MUL_MULH, MUL_MULHSU}) & mult_operand_a_i[31], mult_operand_a_i};
    ib33  = {(mul_op_i == MUL_MULH) & mult_operand_b_i[31], mult_operand_b_i};
    iprod = 66'(ia33 * ib33);
    unique case (mul_op_i)
      MUL_MULH, MUL_MULHSU, MUL_MULHU: int_res = iprod[63:32];
      MUL_MAC:                         int_res = mult_operand_c_i + iprod[31:0];
      MUL_MSU:                         int_res = mult_operand_c_i - iprod[31:0];
      default:                         int_res = iprod[31:0];
    endcase
  end

  // ------------------------------------------------------------ (3) 16b dot product
  logic signed [16:0] da16 [2], db16 [2];
  logic signed [33:0] dp16 [2];
  logic [31:0]        dot16;
  always_comb begin
    for (int i = 0; i < 2; i++) begin
      da16[i] = {signed_a_i & dot_operand_a_i[16*i+15], dot_operand_a_i[16*i +: 16]};
      db16[i] = {signed_b_i & dot_operand_b_i[16*i+15], dot_operand_b_i[16*i +: 16]};
      dp16[i] = 34'(da16[i] * db16[i]);
    end
    dot16 = 32'(dp16[0] + dp16[1]) + (acc_i ? dot_operand_c_i : 32'd0);
  end

  // ------------------------------------------------------------ (4) 8b dot product
  logic signed [8:0]  da8 [4], db8 [4];
  logic signed [17:0] dp8 [4];
  logic [31:0]        dot8;
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      da8[i] = {signed_a_i & dot_operand_a_i[8*i+7], dot_operand_a_i[8*i +: 8]};
      db8[i] = {signed_b_i & dot_operand_b_i[8*i+7], dot_operand_b_i[8*i +: 8]};
      dp8[i] = 18'(da8[i] * db8[i]);
    end
    dot8 = 32'($signed(dp8[0])) + 32'($signed(dp8[1])) + 32'($signed(dp8[2])) + 32'($signed(dp8[3]))
         + (acc_i ? dot_operand_c_i : 32'd0);
  end

  always_comb begin
    unique case (mul_op_i)
      MUL_FRAC:  mult_result_o = fshift[31:0];
      MUL_DOT16: mult_result_o = dot16;
      MUL_DOT8:  mult_result_o = dot8;
      default:   mult_result_o = int_res;
    endcase
  end

endmodule
