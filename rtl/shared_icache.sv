// shared_icache: the instruction cache shared by all cores of the cluster.
//
// CACHE_BYTES of 128b lines, split into N_BANKS banks by line address (bank =
// addr[4 +: log2(N_BANKS)]), so cores fetching different lines are served in parallel.
// Each bank is direct mapped, with a tag and a valid bit per line. The "ICache
// interconnect" is one round-robin arbiter per bank over the cores that ask for it.
// A granted request that hits returns its line one cycle later. A miss holds that bank
// and asks the cache controller for a refill; the controller serves one refill at a time
// (round robin over the banks) on the L2 port, writes the line and tag, and the bank
// then answers the waiting core with the refilled line. Several cores that run the same
// code (the usual single-program-multiple-data case) share the refilled lines.
//
// Core ports: req/gnt/rvalid with a line-aligned address and a 128b line, one request
// outstanding per core. L2 port: l2_req_o/l2_addr_o held until l2_gnt_i, then
// l2_rvalid_i with the 128b line. The paper gives size (4 kB), bank count (4) and the
// sharing; associativity, mapping and arbitration are this design's choices.
module shared_icache #(
  parameter int unsigned N_CORES     = 4,
  parameter int unsigned N_BANKS     = 4,
  parameter int unsigned CACHE_BYTES = 4096
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         req_i    [N_CORES],
  input  logic [31:0]  addr_i   [N_CORES],
  output logic         gnt_o    [N_CORES],
  output logic         rvalid_o [N_CORES],
  output logic [127:0] rdata_o  [N_CORES],
  // refill port towards L2
  output logic         l2_req_o,
  output logic [31:0]  l2_addr_o,
  input  logic         l2_gnt_i,
  input  logic         l2_rvalid_i,
  input  logic [127:0] l2_rdata_i,
  // statistics
  output logic         miss_o   [N_BANKS]
);

  localparam int unsigned LINES = CACHE_BYTES / 16;
  localparam int unsigned LPB   = LINES / N_BANKS;      // lines per bank
  localparam int unsigned BB    = $clog2(N_BANKS);
  localparam int unsigned IB    = $clog2(LPB);
  localparam int unsigned TB    = 32 - 4 - BB - IB;
  localparam int unsigned CW    = (N_CORES > 1) ? $clog2(N_CORES) : 1;

  typedef enum logic [1:0] { READY, MISS, REFILL_DONE } bstate_e;

  logic [127:0]  data_q  [N_BANKS*LPB];   // line storage, index {bank, set}
  logic [TB-1:0] tag_q   [N_BANKS*LPB];
  logic [LPB-1:0] valid_q [N_BANKS];
  bstate_e       state_q [N_BANKS];
  logic [CW-1:0] rr_q    [N_BANKS];
  logic [CW-1:0] win     [N_BANKS];
  logic          any     [N_BANKS];
  logic          hit     [N_BANKS];
  logic [31:0]   win_addr [N_BANKS];
  logic [CW-1:0] pend_core_q [N_BANKS];
  logic [31:0]   pend_addr_q [N_BANKS];
  logic          rsp_v_q [N_BANKS];
  logic [CW-1:0] rsp_core_q [N_BANKS];
  logic [127:0]  rsp_data_q [N_BANKS];

  // refill controller
  typedef enum logic [1:0] { C_IDLE, C_REQ, C_WAIT } cstate_e;
  cstate_e       cstate_q;
  logic [BB-1:0] cbank_q, crr_q;
  logic          miss_any;                 // some bank waits for a refill
  logic [BB-1:0] miss_bank;                // the first of them from crr_q on
  logic [IB-1:0] refill_set;

  // (base + k) mod n for base < n and k < n, without a divider
  function automatic int unsigned wrap(int unsigned base, int unsigned k, int unsigned n);
    return (base + k >= n) ? base + k - n : base + k;
  endfunction

  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      any[b] = 1'b0;
      win[b] = '0;
      for (int k = 0; k < N_CORES; k++) begin
        if (!any[b] && req_i[wrap(32'(rr_q[b]), k, N_CORES)] &&
            32'(addr_i[wrap(32'(rr_q[b]), k, N_CORES)][4 +: BB]) == b) begin
          any[b] = 1'b1;
          win[b] = CW'(wrap(32'(rr_q[b]), k, N_CORES));
        end
      end
      win_addr[b] = addr_i[win[b]];
      hit[b] = valid_q[b][win_addr[b][4+BB +: IB]] &&
               tag_q[{BB'(b), win_addr[b][4+BB +: IB]}] == win_addr[b][31 -: TB];
      miss_o[b] = state_q[b] == READY && any[b] && !hit[b];
    end
    for (int c = 0; c < N_CORES; c++) begin
      gnt_o[c]    = 1'b0;
      rvalid_o[c] = 1'b0;
      rdata_o[c]  = '0;
      for (int b = 0; b < N_BANKS; b++) begin
        if (state_q[b] == READY && any[b] && win[b] == CW'(c)) gnt_o[c] = 1'b1;
        if (rsp_v_q[b] && rsp_core_q[b] == CW'(c)) begin
          rvalid_o[c] = 1'b1;
          rdata_o[c]  = rsp_data_q[b];
        end
      end
    end
    miss_any  = 1'b0;
    miss_bank = '0;
    for (int k = 0; k < N_BANKS; k++) begin
      if (!miss_any && state_q[wrap(32'(crr_q), k, N_BANKS)] == MISS) begin
        miss_any  = 1'b1;
        miss_bank = BB'(wrap(32'(crr_q), k, N_BANKS));
      end
    end
    refill_set = pend_addr_q[cbank_q][4+BB +: IB];
    l2_req_o  = cstate_q == C_REQ;
    l2_addr_o = {pend_addr_q[cbank_q][31:4], 4'd0};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cstate_q <= C_IDLE;
      cbank_q  <= '0;
      crr_q    <= '0;
      for (int b = 0; b < N_BANKS; b++) begin
        valid_q[b]     <= '0;
        state_q[b]     <= READY;
        rr_q[b]        <= '0;
        pend_core_q[b] <= '0;
        pend_addr_q[b] <= '0;
        rsp_v_q[b]     <= 1'b0;
        rsp_core_q[b]  <= '0;
        rsp_data_q[b]  <= '0;
      end
    end else begin
      for (int b = 0; b < N_BANKS; b++) begin
        rsp_v_q[b] <= 1'b0;
        unique case (state_q[b])
          READY: if (any[b]) begin
            rr_q[b] <= CW'(wrap(32'(win[b]), 1, N_CORES));
            if (hit[b]) begin
              rsp_v_q[b]    <= 1'b1;
              rsp_core_q[b] <= win[b];
              rsp_data_q[b] <= data_q[{BB'(b), win_addr[b][4+BB +: IB]}];
            end else begin
              state_q[b]     <= MISS;
              pend_core_q[b] <= win[b];
              pend_addr_q[b] <= win_addr[b];
            end
          end
          REFILL_DONE: begin
            state_q[b]    <= READY;
            rsp_v_q[b]    <= 1'b1;
            rsp_core_q[b] <= pend_core_q[b];
            rsp_data_q[b] <= data_q[{BB'(b), pend_addr_q[b][4+BB +: IB]}];
          end
          default: ;   // MISS: waiting for the controller
        endcase
      end
      // cache controller: one refill at a time
      unique case (cstate_q)
        C_IDLE: if (miss_any) begin
          cbank_q  <= miss_bank;
          cstate_q <= C_REQ;
        end
        C_REQ: if (l2_gnt_i) cstate_q <= C_WAIT;
        default: if (l2_rvalid_i) begin
          valid_q[cbank_q][refill_set] <= 1'b1;
          state_q[cbank_q] <= REFILL_DONE;
          crr_q    <= BB'(wrap(32'(cbank_q), 1, N_BANKS));
          cstate_q <= C_IDLE;
        end
      endcase
    end
  end

  // line and tag storage: written by the refill, no reset
  always_ff @(posedge clk_i) begin
    if (cstate_q == C_WAIT && l2_rvalid_i) begin
      data_q[{cbank_q, refill_set}] <= l2_rdata_i;
      tag_q[{cbank_q, refill_set}]  <= pend_addr_q[cbank_q][31 -: TB];
    end
  end

endmodule
