// divider: iterative long-division unit for div, divu, rem and remu of RV32M.
//
// Signed operands are made positive first. The divisor is then shifted left so that its
// leading one lines up with the dividend's leading one, and one restoring-division step is
// done per cycle (compare, subtract, shift the quotient bit in) until the divisor is back
// at its original position. The number of steps is therefore the difference of the two
// leading-zero counts plus one, so the latency depends on the operands as the paper says
// (2 to 32 cycles, plus one cycle here for the result). Division by zero returns all ones
// (remainder: the dividend) and the overflow case -2^31 / -1 returns -2^31 (remainder 0),
// as the RISC-V specification requires.
//
// The paper reuses the ALU's comparator, shifter and adder for this; here the divider has
// its own subtractor and shifter, which is this design's simplification.
// Interface: pulse start_i with the operands; busy_o stays high until valid_o, which
// is high for one cycle together with result_o.
module divider
  import riscv_pkg::*;
#(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  div_op_e          op_i,
  input  logic [WIDTH-1:0] dividend_i,
  input  logic [WIDTH-1:0] divisor_i,
  output logic             busy_o,
  output logic             valid_o,
  output logic [WIDTH-1:0] result_o
);

  localparam int unsigned CW = $clog2(WIDTH) + 1;

  typedef enum logic [1:0] { IDLE, RUN, DONE } state_e;
  state_e state_q;

  logic [WIDTH-1:0] rem_q, quo_q, den_q;
  logic [CW-1:0]    cnt_q;
  logic             neg_q, rem_op_q, special_q;
  logic [WIDTH-1:0] special_res_q;

  function automatic logic [CW-1:0] lzc(logic [WIDTH-1:0] v);
    logic [CW-1:0] n;
    n = CW'(WIDTH);
    for (int i = 0; i < WIDTH; i++) if (v[i]) n = CW'(WIDTH - 1 - i);
    return n;
  endfunction

  logic             sgn, a_neg, b_neg;
  logic [WIDTH-1:0] a_abs, b_abs;
  logic [CW-1:0]    lz_a, lz_b;
  always_comb begin
    sgn   = op_i inside {DIV_DIV, DIV_REM};
    a_neg = sgn & dividend_i[WIDTH-1];
    b_neg = sgn & divisor_i[WIDTH-1];
    a_abs = a_neg ? -dividend_i : dividend_i;
    b_abs = b_neg ? -divisor_i : divisor_i;
    lz_a  = lzc(a_abs);
    lz_b  = lzc(b_abs);
  end

  logic [WIDTH-1:0] diff;
  logic             ge;
  always_comb begin
    ge   = rem_q >= den_q;
    diff = rem_q - den_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q       <= IDLE;
      rem_q         <= '0;
      quo_q         <= '0;
      den_q         <= '0;
      cnt_q         <= '0;
      neg_q         <= 1'b0;
      rem_op_q      <= 1'b0;
      special_q     <= 1'b0;
      special_res_q <= '0;
    end else begin
      unique case (state_q)
        IDLE: if (start_i) begin
          rem_op_q  <= op_i inside {DIV_REM, DIV_REMU};
          rem_q     <= a_abs;
          quo_q     <= '0;
          special_q <= 1'b0;
          if (divisor_i == '0) begin
            special_q     <= 1'b1;
            special_res_q <= (op_i inside {DIV_REM, DIV_REMU}) ? dividend_i : '1;
            state_q       <= DONE;
          end else if (lz_b < lz_a) begin    // |divisor| > |dividend|: quotient 0
            cnt_q   <= '0;
            den_q   <= b_abs;
            neg_q   <= (op_i inside {DIV_REM, DIV_REMU}) ? a_neg : 1'b0;
            state_q <= DONE;
          end else begin
            den_q   <= b_abs << (lz_b - lz_a);
            cnt_q   <= lz_b - lz_a;
            neg_q   <= (op_i inside {DIV_REM, DIV_REMU}) ? a_neg : (a_neg ^ b_neg);
            state_q <= RUN;
          end
        end
        RUN: begin
          if (ge) rem_q <= diff;
          quo_q <= {quo_q[WIDTH-2:0], ge};
          den_q <= den_q >> 1;
          if (cnt_q == '0) state_q <= DONE;
          else             cnt_q   <= cnt_q - 1'b1;
        end
        default: state_q <= IDLE;     // DONE: result shown for one cycle
      endcase
    end
  end

  logic [WIDTH-1:0] mag;
  always_comb begin
    mag      = rem_op_q ? rem_q : quo_q;
    result_o = special_q ? special_res_q : (neg_q ? -mag : mag);
    valid_o  = state_q == DONE;
    busy_o   = state_q != IDLE;
  end

endmodule
