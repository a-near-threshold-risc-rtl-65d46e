// hwloop_unit: zero-overhead hardware loops, two register sets and their controller.
//
// Each set holds a start address, an end address (the address of the last instruction
// of the loop body) and an iteration count. The controller watches the instruction that
// leaves the L0 buffer for ID: when its address equals a set's end address and that
// set's count is above one, it tells the fetch stage to continue at the start address
// (jump_o/target_o) and decrements the count, so no branch instruction is fetched or
// executed. When the count is one it falls through and the count goes to zero. Set 0 is
// the inner loop and is checked first; when both sets end on the same instruction and
// set 0 is done, set 1 takes the jump in the same cycle.
//
// The registers are written from the ID stage by the lp.* instructions (we_i with a
// mask of fields) and from the CSR unit (csr_we_i), where they are also readable, so
// software can save and restore them. A write from ID is bypassed into the comparison of
// the same cycle, because the first loop instruction can leave the buffer in the cycle
// lp.setup is issued. The paper fixes two sets; the bypass and the priority are this
// design's choices.
module hwloop_unit #(
  parameter int unsigned N_SETS = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // from ID: lp.* instructions
  input  logic        we_i,
  input  logic        set_i,
  input  logic [2:0]  we_mask_i,       // {count, end, start}
  input  logic [31:0] start_i,
  input  logic [31:0] end_i,
  input  logic [31:0] count_i,
  // from the CSR unit
  input  logic        csr_we_i,
  input  logic        csr_set_i,
  input  logic [1:0]  csr_reg_i,       // 0 start, 1 end, 2 count
  input  logic [31:0] csr_wdata_i,
  output logic [31:0] start_o [N_SETS],
  output logic [31:0] end_o   [N_SETS],
  output logic [31:0] count_o [N_SETS],
  // fetch side
  input  logic [31:0] pc_i,            // instruction leaving the L0 buffer
  input  logic        take_i,          // ... and entering ID
  output logic        jump_o,
  output logic [31:0] target_o
);

  logic [31:0] start_q [N_SETS], end_q [N_SETS], count_q [N_SETS];
  logic [31:0] start_e [N_SETS], end_e [N_SETS], count_e [N_SETS];
  logic [N_SETS-1:0] match, dec;

  always_comb begin
    for (int s = 0; s < N_SETS; s++) begin
      start_e[s] = (we_i && set_i == s[0] && we_mask_i[0]) ? start_i : start_q[s];
      end_e[s]   = (we_i && set_i == s[0] && we_mask_i[1]) ? end_i   : end_q[s];
      count_e[s] = (we_i && set_i == s[0] && we_mask_i[2]) ? count_i : count_q[s];
      match[s]   = pc_i == end_e[s] && count_e[s] != 32'd0;
    end
    jump_o   = 1'b0;
    target_o = start_e[0];
    dec      = '0;
    for (int s = 0; s < N_SETS; s++) begin
      if (!jump_o && match[s]) begin
        dec[s] = 1'b1;
        if (count_e[s] > 32'd1) begin
          jump_o   = 1'b1;
          target_o = start_e[s];
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < N_SETS; s++) begin
        start_q[s] <= '0;
        end_q[s]   <= '0;
        count_q[s] <= '0;
      end
    end else begin
      for (int s = 0; s < N_SETS; s++) begin
        start_q[s] <= start_e[s];
        end_q[s]   <= end_e[s];
        count_q[s] <= (take_i && dec[s]) ? count_e[s] - 32'd1 : count_e[s];
        if (csr_we_i && csr_set_i == s[0]) begin
          unique case (csr_reg_i)
            2'd0:    start_q[s] <= csr_wdata_i;
            2'd1:    end_q[s]   <= csr_wdata_i;
            default: count_q[s] <= csr_wdata_i;
          endcase
        end
      end
    end
  end

  assign start_o = start_q;
  assign end_o   = end_q;
  assign count_o = count_q;

endmodule
