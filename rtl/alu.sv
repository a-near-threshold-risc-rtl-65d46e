// alu: the vectorial ALU of the EX stage.
//
// Five parts, as in the paper's ALU block diagram: (1) a vectorial adder followed by a
// rounding adder and a shifter, (2) a vectorial comparator with the clip unit, (3) the
// bit-manipulation unit, (4) the logic unit and (5) the shuffle unit; a final multiplexer
// picks the result by operator, and the comparator also drives the branch decision.
//
// The vectorial adder is 36 bits wide: between the byte lanes it carries one extra bit
// pair that either passes the carry on (32b mode, and the 16b lane middle) or cuts it and,
// for subtraction, injects the +1 of the two's complement into the next lane. Add/sub with
// normalisation (p.addN, p.subN) shift the 32b sum right arithmetically by I = bmask_a;
// the rounding variants first add 2^(I-1) in the extra adder. Clip saturates to
// [-2^(I-1), 2^(I-1)-1] (clipu to [0, 2^(I-1)-1]). Bit-field instructions use the field
// length-1 in bmask_a and the offset in bmask_b. The shuffle unit is one byte-wide
// multiplexer per result byte choosing among the bytes of operand_a, operand_b and
// operand_c or a sign/zero fill; shuffle, shuffle2, pack, lane extract and lane insert
// are different select patterns for it. Shuffle masks hold one 3-bit field per byte
// (bits 1:0 byte index, bit 2 register select: 1 = operand_a, 0 = operand_c) and one
// 2-bit field per halfword (bit 0 index, bit 1 select), packed from bit 0 up, the layout
// printed in the paper's shuffle example (mask 0x8D1).
//
// The paper builds the 32b comparison from the four 8b comparisons and shares one
// comparator with clip; here each lane width is written out with its own compare, which
// gives the same results. Purely combinational; operands come from the ALU's own
// operand registers in the core.
module alu
  import riscv_pkg::*;
(
  input  alu_op_e     operator_i,
  input  vec_mode_e   vec_mode_i,
  input  logic [31:0] operand_a_i,
  input  logic [31:0] operand_b_i,
  input  logic [31:0] operand_c_i,
  input  logic [4:0]  bmask_a_i,
  input  logic [4:0]  bmask_b_i,
  output logic [31:0] result_o,
  output logic        cmp_result_o     // branch decision
);

  // ------------------------------------------------------------ 36b vectorial adder
  logic        sub;
  logic [31:0] add_b;
  logic [2:0]  cut;       // carry cut above byte 0, 1, 2
  logic [35:0] wide_a, wide_b, wide_s;
  logic [31:0] vec_sum;

  always_comb begin
    sub   = operator_i inside {ALU_SUB, ALU_SUBN, ALU_SUBRN};
    add_b = sub ? ~operand_b_i : operand_b_i;
    unique case (vec_mode_i)
      VEC_8:   cut = 3'b111;
      VEC_16:  cut = 3'b010;
      default: cut = 3'b000;
    endcase
    wide_a = {operand_a_i[31:24], cut[2] ? sub : 1'b1, operand_a_i[23:16], cut[1] ? sub : 1'b1,
              operand_a_i[15:8], cut[0] ? sub : 1'b1, operand_a_i[7:0], 1'b1};
    wide_b = {add_b[31:24], cut[2] ? sub : 1'b0, add_b[23:16], cut[1] ? sub : 1'b0,
              add_b[15:8], cut[0] ? sub : 1'b0, add_b[7:0], sub};
    wide_s  = wide_a + wide_b;
    vec_sum = {wide_s[35:28], wide_s[26:19], wide_s[17:10], wide_s[8:1]};
  end

  // ------------------------------------------------------------ round and normalise
  logic [31:0] round_val, rounded, normalised;
  always_comb begin
    round_val  = (operator_i inside {ALU_ADDRN, ALU_SUBRN} && bmask_a_i != 5'd0)
                 ? (32'd1 << (bmask_a_i - 5'd1)) : 32'd0;
    rounded    = vec_sum + round_val;
    normalised = 32'($signed(rounded) >>> bmask_a_i);
  end

  // ------------------------------------------------------------ per-lane operations
  // a and b are lane values in the low w bits; the result is masked to w bits.
  function automatic logic [31:0] lane_op(alu_op_e op, logic [31:0] a, logic [31:0] b, int unsigned w);
    logic [32:0] as, bs, au, bu, r;
    logic [31:0] m;
    logic [4:0]  sh;
    logic        lts, ltu, eq;
    m  = (w == 32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 32'd1);
    au = {1'b0, a & m};
    bu = {1'b0, b & m};
    as = au;
    bs = bu;
    if (a[w-1]) as = au | ~{1'b0, m};
    if (b[w-1]) bs = bu | ~{1'b0, m};
    sh  = 5'(b & (w - 1));
    lts = $signed(as) < $signed(bs);
    ltu = au < bu;
    eq  = au == bu;
    unique case (op)
      ALU_AVG:  r = 33'($signed(as + bs) >>> 1);
      ALU_AVGU: r = (au + bu) >> 1;
      ALU_MIN:  r = lts ? as : bs;
      ALU_MINU: r = ltu ? au : bu;
      ALU_MAX:  r = lts ? bs : as;
      ALU_MAXU: r = ltu ? bu : au;
      ALU_ABS:  r = as[32] ? (33'd0 - as) : as;
      ALU_SLL:  r = au << sh;
      ALU_SRL:  r = au >> sh;
      ALU_SRA:  r = 33'($signed(as) >>> sh);
      ALU_EQ:   r = eq ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_NE:   r = !eq ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_GT:   r = (!lts && !eq) ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_GE:   r = !lts ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_LT:   r = lts ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_LE:   r = (lts || eq) ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_GTU:  r = (!ltu && !eq) ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_GEU:  r = !ltu ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_LTU:  r = ltu ? 33'h1_FFFF_FFFF : 33'd0;
      ALU_LEU:  r = (ltu || eq) ? 33'h1_FFFF_FFFF : 33'd0;
      default:  r = 33'd0;
    endcase
    return r[31:0] & m;
  endfunction

  logic [31:0] lane_res;
  always_comb begin
    lane_res = '0;
    unique case (vec_mode_i)
      VEC_8:   for (int i = 0; i < 4; i++)
                 lane_res[8*i +: 8] = lane_op(operator_i, {24'd0, operand_a_i[8*i +: 8]},
                                              {24'd0, operand_b_i[8*i +: 8]}, 8)[7:0];
      VEC_16:  for (int i = 0; i < 2; i++)
                 lane_res[16*i +: 16] = lane_op(operator_i, {16'd0, operand_a_i[16*i +: 16]},
                                                {16'd0, operand_b_i[16*i +: 16]}, 16)[15:0];
      default: lane_res = lane_op(operator_i, operand_a_i, operand_b_i, 32);
    endcase
  end

  // ------------------------------------------------------------ comparator (32b) and clip
  logic lt_s, lt_u, eq_32;
  logic [31:0] clip_hi, clip_lo, clip_res;
  always_comb begin
    lt_s  = $signed(operand_a_i) < $signed(operand_b_i);
    lt_u  = operand_a_i < operand_b_i;
    eq_32 = operand_a_i == operand_b_i;
    unique case (operator_i)
      ALU_EQ:  cmp_result_o = eq_32;
      ALU_NE:  cmp_result_o = !eq_32;
      ALU_LT:  cmp_result_o = lt_s;
      ALU_GE:  cmp_result_o = !lt_s;
      ALU_LTU: cmp_result_o = lt_u;
      ALU_GEU: cmp_result_o = !lt_u;
      default: cmp_result_o = 1'b0;
    endcase
    clip_hi = (bmask_a_i == 5'd0) ? 32'd0 : (32'd1 << (bmask_a_i - 5'd1)) - 32'd1;
    clip_lo = (operator_i == ALU_CLIPU) ? 32'd0 : ~clip_hi;
    if ($signed(operand_a_i) > $signed(clip_hi))      clip_res = clip_hi;
    else if ($signed(operand_a_i) < $signed(clip_lo)) clip_res = clip_lo;
    else                                              clip_res = operand_a_i;
  end

  // ------------------------------------------------------------ bit manipulation
  logic [31:0] fmask, field, bit_res;
  logic [5:0]  popcnt, ff1, fl1, clb;
  always_comb begin
    fmask = (bmask_a_i == 5'd31) ? 32'hFFFF_FFFF : ((32'd1 << (bmask_a_i + 5'd1)) - 32'd1);
    field = (operand_a_i >> bmask_b_i) & fmask;
    popcnt = '0;
    for (int i = 0; i < 32; i++) popcnt = popcnt + 6'(operand_a_i[i]);
    ff1 = 6'd32;
    for (int i = 31; i >= 0; i--) if (operand_a_i[i]) ff1 = 6'(i);
    fl1 = 6'd32;
    for (int i = 0; i < 32; i++) if (operand_a_i[i]) fl1 = 6'(i);
    clb = 6'd0;
    if (operand_a_i != 32'd0) begin
      for (int i = 30; i >= 0; i--) begin
        if (operand_a_i[i] != operand_a_i[31]) break;
        clb = clb + 6'd1;
      end
    end
    unique case (operator_i)
      ALU_EXTRACT:  bit_res = field[bmask_a_i] ? (field | ~fmask) : field;
      ALU_EXTRACTU: bit_res = field;
      ALU_INSERT:   bit_res = (operand_c_i & ~(fmask << bmask_b_i)) | ((operand_a_i & fmask) << bmask_b_i);
      ALU_BCLR:     bit_res = operand_a_i & ~(fmask << bmask_b_i);
      ALU_BSET:     bit_res = operand_a_i | (fmask << bmask_b_i);
      ALU_CNT:      bit_res = {26'd0, popcnt};
      ALU_FF1:      bit_res = {26'd0, ff1};
      ALU_FL1:      bit_res = {26'd0, fl1};
      ALU_CLB:      bit_res = {26'd0, clb};
      ALU_EXTHS:    bit_res = {{16{operand_a_i[15]}}, operand_a_i[15:0]};
      ALU_EXTHZ:    bit_res = {16'd0, operand_a_i[15:0]};
      ALU_EXTBS:    bit_res = {{24{operand_a_i[7]}}, operand_a_i[7:0]};
      default:      bit_res = {24'd0, operand_a_i[7:0]};
    endcase
  end

  // ------------------------------------------------------------ shuffle unit
  // source byte numbering: 0..3 operand_a, 4..7 operand_b, 8..11 operand_c
  logic [95:0] src;
  logic [3:0]  bsel [4];
  logic [1:0]  fill [4];       // 0: take source byte, 1: zero, 2: sign of fill_byte
  logic [3:0]  fill_byte;
  logic [31:0] shuf_res;
  logic [1:0]  lane;
  always_comb begin
    src       = {operand_c_i, operand_b_i, operand_a_i};
    lane      = bmask_a_i[1:0];
    fill_byte = 4'd0;
    for (int i = 0; i < 4; i++) begin
      bsel[i] = 4'(i);
      fill[i] = 2'd0;
    end
    unique case (operator_i)
      ALU_SHUF, ALU_SHUF2: begin
        for (int i = 0; i < 4; i++) begin
          if (vec_mode_i == VEC_8) begin
            bsel[i] = (operator_i == ALU_SHUF2 && !operand_b_i[3*i+2]) ? 4'd8 + 4'(operand_b_i[3*i +: 2])
                                                                      : 4'(operand_b_i[3*i +: 2]);
          end else begin
            bsel[i] = (operator_i == ALU_SHUF2 && !operand_b_i[2*(i/2)+1])
                      ? 4'd8 + 4'(2*operand_b_i[2*(i/2)]) + 4'(i%2)
                      : 4'(2*operand_b_i[2*(i/2)]) + 4'(i%2);
          end
        end
      end
      ALU_PACK: begin     // {a[15:0], b[15:0]}
        bsel[0] = 4'd4; bsel[1] = 4'd5; bsel[2] = 4'd0; bsel[3] = 4'd1;
      end
      ALU_PACKHI: begin   // {a[7:0], b[7:0], c[15:0]}
        bsel[0] = 4'd8; bsel[1] = 4'd9; bsel[2] = 4'd4; bsel[3] = 4'd0;
      end
      ALU_PACKLO: begin   // {c[31:16], a[7:0], b[7:0]}
        bsel[0] = 4'd4; bsel[1] = 4'd0; bsel[2] = 4'd10; bsel[3] = 4'd11;
      end
      ALU_VEXT, ALU_VEXTU: begin
        if (vec_mode_i == VEC_8) begin
          bsel[0]   = 4'(lane);
          fill_byte = 4'(lane);
          for (int i = 1; i < 4; i++) fill[i] = (operator_i == ALU_VEXT) ? 2'd2 : 2'd1;
        end else begin
          bsel[0]   = 4'(2*lane[0]);
          bsel[1]   = 4'(2*lane[0]) + 4'd1;
          fill_byte = 4'(2*lane[0]) + 4'd1;
          for (int i = 2; i < 4; i++) fill[i] = (operator_i == ALU_VEXT) ? 2'd2 : 2'd1;
        end
      end
      ALU_VINS: begin
        for (int i = 0; i < 4; i++) bsel[i] = 4'd8 + 4'(i);
        if (vec_mode_i == VEC_8) bsel[lane] = 4'd0;
        else begin
          bsel[2*lane[0]]   = 4'd0;
          bsel[2*lane[0]+1] = 4'd1;
        end
      end
      default: ;
    endcase
    for (int i = 0; i < 4; i++) begin
      unique case (fill[i])
        2'd1:    shuf_res[8*i +: 8] = 8'd0;
        2'd2:    shuf_res[8*i +: 8] = {8{src[8*fill_byte + 7]}};
        default: shuf_res[8*i +: 8] = src[8*bsel[i] +: 8];
      endcase
    end
  end

  // ------------------------------------------------------------ result multiplexer
  always_comb begin
    unique case (operator_i)
      ALU_ADD, ALU_SUB:                          result_o = vec_sum;
      ALU_ADDN, ALU_SUBN, ALU_ADDRN, ALU_SUBRN:  result_o = normalised;
      ALU_XOR:                                   result_o = operand_a_i ^ operand_b_i;
      ALU_OR:                                    result_o = operand_a_i | operand_b_i;
      ALU_AND:                                   result_o = operand_a_i & operand_b_i;
      ALU_SLT:                                   result_o = {31'd0, lt_s};
      ALU_SLTU:                                  result_o = {31'd0, lt_u};
      ALU_CLIP, ALU_CLIPU:                       result_o = clip_res;
      ALU_EXTRACT, ALU_EXTRACTU, ALU_INSERT, ALU_BCLR, ALU_BSET,
      ALU_CNT, ALU_FF1, ALU_FL1, ALU_CLB,
      ALU_EXTHS, ALU_EXTHZ, ALU_EXTBS, ALU_EXTBZ: result_o = bit_res;
      ALU_SHUF, ALU_SHUF2, ALU_PACK, ALU_PACKHI, ALU_PACKLO,
      ALU_VEXT, ALU_VEXTU, ALU_VINS:             result_o = shuf_res;
      default:                                   result_o = lane_res;
    endcase
  end

endmodule
