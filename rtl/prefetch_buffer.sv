// prefetch_buffer: the L0 instruction buffer of the IF stage.
//
// The shared instruction cache delivers whole 128b lines. This buffer keeps the last line
// it fetched and hands out one instruction per cycle from it: a 16b compressed one or a
// 32b one that may start at any halfword. When a 32b instruction starts in the last
// halfword of the line, its lower half is kept in the "last instruction" register, the
// next line is fetched, and the two halves are joined, so instructions that straddle a
// line boundary cost only the refetch, not a second fetch of the old line. A loop body
// that fits into the line runs from the buffer without any cache access.
//
// The FSM fetches a line whenever the current address is not in the buffer: after a
// branch or jump (branch_i, from the pipeline), after a hardware-loop jump back to the
// loop start (hwlp_jump_i, taken when the loop-end instruction leaves the buffer) and
// when sequential execution runs past the end of the line. Fetching the next sequential
// line ahead of time is not done: the paper's buffer holds one line, and this design
// does not add a second one.
//
// Cache interface (req/gnt/rvalid, one outstanding request): instr_req_o with a
// line-aligned instr_addr_o is held until instr_gnt_i; instr_rvalid_i brings the line
// later. A response that arrives after a branch is still stored: it is a correct line of
// memory, it just may not be the one now needed. To the ID stage: valid_o, rdata_o
// (raw, possibly compressed), addr_o (its PC); the instruction is taken when valid_o and
// ready_i are both high.
module prefetch_buffer #(
  parameter int unsigned LINE_W = 128
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,           // fetching enabled
  input  logic [31:0] boot_addr_i,
  // redirect from the pipeline
  input  logic        branch_i,
  input  logic [31:0] branch_addr_i,
  // hardware loop jump, applied when the current instruction is taken
  input  logic        hwlp_jump_i,
  input  logic [31:0] hwlp_target_i,
  // to ID
  input  logic        ready_i,
  output logic        valid_o,
  output logic [31:0] rdata_o,
  output logic [31:0] addr_o,
  // to the instruction cache
  output logic        instr_req_o,
  output logic [31:0] instr_addr_o,
  input  logic        instr_gnt_i,
  input  logic        instr_rvalid_i,
  input  logic [LINE_W-1:0] instr_rdata_i,
  // statistics
  output logic        cross_o          // a line-crossing 32b instruction was joined
);

  localparam int unsigned NHW = LINE_W / 16;        // halfwords per line
  localparam int unsigned OFS = $clog2(LINE_W / 8); // byte offset bits
  localparam int unsigned HWB = $clog2(NHW);

  typedef enum logic { IDLE, WAIT_RVALID } state_e;
  state_e state_q;

  logic [LINE_W-1:0]   line_q;
  logic [31-OFS:0]     line_addr_q, req_line_q;
  logic                line_valid_q;
  logic [31:0]         pc_q;
  logic [15:0]         last_q;         // lower half of a line-crossing instruction
  logic                cross_q;        // last_q holds the lower half of pc_q's instruction
  logic                started_q;

  logic [31-OFS:0] pc_line;
  logic [HWB-1:0]  hw;
  logic [15:0]     lower, upper;
  logic            hit, hit_next, is_c, need_line;
  logic [31-OFS:0] fetch_line;

  always_comb begin
    pc_line  = pc_q[31:OFS];
    hw       = pc_q[OFS-1:1];
    hit      = line_valid_q && line_addr_q == pc_line;
    hit_next = line_valid_q && line_addr_q == pc_line + 1'b1;
    lower    = line_q[16*hw +: 16];
    upper    = line_q[16*(32'(hw) + 1) % LINE_W +: 16];
    valid_o  = 1'b0;
    rdata_o  = '0;
    need_line  = 1'b0;
    fetch_line = pc_line;
    is_c     = 1'b0;
    if (cross_q) begin
      // lower half saved, waiting for / holding the next line
      if (hit_next) begin
        valid_o = 1'b1;
        rdata_o = {line_q[15:0], last_q};
      end else begin
        need_line  = 1'b1;
        fetch_line = pc_line + 1'b1;
      end
    end else if (hit) begin
      is_c = lower[1:0] != 2'b11;
      if (is_c) begin
        valid_o = 1'b1;
        rdata_o = {16'd0, lower};
      end else if (32'(hw) != NHW - 1) begin
        valid_o = 1'b1;
        rdata_o = {upper, lower};
      end else begin
        need_line  = 1'b1;
        fetch_line = pc_line + 1'b1;
      end
    end else begin
      need_line = 1'b1;
    end
    valid_o = valid_o && started_q && !branch_i;
    addr_o  = pc_q;
  end

  assign instr_req_o  = state_q == IDLE && need_line && started_q && req_i && !branch_i;
  assign instr_addr_o = {fetch_line, {OFS{1'b0}}};
  assign cross_o      = valid_o && ready_i && cross_q;

  logic take;
  assign take = valid_o && ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= IDLE;
      line_q       <= '0;
      line_addr_q  <= '0;
      req_line_q   <= '0;
      line_valid_q <= 1'b0;
      pc_q         <= '0;
      last_q       <= '0;
      cross_q      <= 1'b0;
      started_q    <= 1'b0;
    end else begin
      if (!started_q) begin
        started_q <= req_i;
        pc_q      <= boot_addr_i;
      end
      // memory side
      unique case (state_q)
        IDLE: if (instr_req_o && instr_gnt_i) begin
          state_q    <= WAIT_RVALID;
          req_line_q <= fetch_line;
        end
        default: if (instr_rvalid_i) begin
          state_q      <= IDLE;
          line_q       <= instr_rdata_i;
          line_addr_q  <= req_line_q;
          line_valid_q <= 1'b1;
        end
      endcase
      // instruction side
      if (branch_i) begin
        pc_q    <= branch_addr_i;
        cross_q <= 1'b0;
      end else if (take) begin
        pc_q    <= hwlp_jump_i ? hwlp_target_i : pc_q + (is_c && !cross_q ? 32'd2 : 32'd4);
        cross_q <= 1'b0;
      end else if (!cross_q && hit && !is_c && 32'(hw) == NHW - 1 && started_q) begin
        last_q  <= lower;        // keep the lower half before the line is replaced
        cross_q <= 1'b1;
      end
    end
  end

endmodule
