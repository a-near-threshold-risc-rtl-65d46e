// log_interconnect: the logarithmic interconnect between the data masters of the
// cluster (the cores and the DMA port) and the word-interleaved TCDM banks.
//
// Consecutive 32b words lie in consecutive banks: bank = addr[2 +: log2(N_BANKS)], row =
// the address bits above. Every bank has its own round-robin arbiter; masters that ask
// for different banks are all served in the same cycle, masters that collide on one bank
// are served one per cycle and the others see gnt low and keep their request up (a TCDM
// contention). The answer of a granted read comes one cycle after the grant, routed back
// to the master that was granted. The paper uses this interconnect from earlier PULP
// work and names only its function; the round-robin policy is this design's choice.
module log_interconnect
  import riscv_pkg::*;
#(
  parameter int unsigned N_MASTERS = 5,
  parameter int unsigned N_BANKS   = 8,
  parameter int unsigned ROW_AW    = 12,
  parameter int unsigned BANK_BITS = $clog2(N_BANKS)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  mem_req_t          m_req_i  [N_MASTERS],
  output mem_rsp_t          m_rsp_o  [N_MASTERS],
  output logic              contention_o [N_MASTERS],
  // to the banks
  output logic              b_req_o   [N_BANKS],
  output logic              b_we_o    [N_BANKS],
  output logic [3:0]        b_be_o    [N_BANKS],
  output logic [ROW_AW-1:0] b_addr_o  [N_BANKS],
  output logic [31:0]       b_wdata_o [N_BANKS],
  input  logic [31:0]       b_rdata_i [N_BANKS]
);

  localparam int unsigned MW = (N_MASTERS > 1) ? $clog2(N_MASTERS) : 1;

  logic [MW-1:0] rr_q  [N_BANKS];     // master with highest priority next
  logic [MW-1:0] win   [N_BANKS];
  logic          busy  [N_BANKS];
  logic [MW-1:0] resp_m_q [N_BANKS];
  logic          resp_v_q [N_BANKS];

  // (base + k) mod N_MASTERS for base < N_MASTERS and k < N_MASTERS, without a divider
  function automatic logic [MW-1:0] wrap(logic [MW-1:0] base, int k);
    logic [MW:0] s;
    s = {1'b0, base} + (MW+1)'(k);
    if (32'(s) >= N_MASTERS) s = s - (MW+1)'(N_MASTERS);
    return s[MW-1:0];
  endfunction

  always_comb begin
    for (int b = 0; b < N_BANKS; b++) begin
      busy[b] = 1'b0;
      win[b]  = '0;
      for (int k = 0; k < N_MASTERS; k++) begin
        if (!busy[b] && m_req_i[wrap(rr_q[b], k)].req &&
            32'(m_req_i[wrap(rr_q[b], k)].addr[2 +: BANK_BITS]) == b) begin
          busy[b] = 1'b1;
          win[b]  = wrap(rr_q[b], k);
        end
      end
      b_req_o[b]   = busy[b];
      b_we_o[b]    = m_req_i[win[b]].we;
      b_be_o[b]    = m_req_i[win[b]].be;
      b_addr_o[b]  = m_req_i[win[b]].addr[2 + BANK_BITS +: ROW_AW];
      b_wdata_o[b] = m_req_i[win[b]].wdata;
    end
    for (int m = 0; m < N_MASTERS; m++) begin
      m_rsp_o[m] = '0;
      for (int b = 0; b < N_BANKS; b++) begin
        if (busy[b] && win[b] == MW'(m)) m_rsp_o[m].gnt = 1'b1;
        if (resp_v_q[b] && resp_m_q[b] == MW'(m)) begin
          m_rsp_o[m].rvalid = 1'b1;
          m_rsp_o[m].rdata  = b_rdata_i[b];
        end
      end
      contention_o[m] = m_req_i[m].req && !m_rsp_o[m].gnt;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < N_BANKS; b++) begin
        rr_q[b]     <= '0;
        resp_m_q[b] <= '0;
        resp_v_q[b] <= 1'b0;
      end
    end else begin
      for (int b = 0; b < N_BANKS; b++) begin
        resp_v_q[b] <= busy[b];
        resp_m_q[b] <= win[b];
        if (busy[b]) rr_q[b] <= wrap(win[b], 1);
      end
    end
  end

  // a master gets at most one answer per cycle
  for (genvar m = 0; m < N_MASTERS; m++) begin : g_chk
    logic [N_BANKS-1:0] hits;
    always_comb for (int b = 0; b < N_BANKS; b++) hits[b] = resp_v_q[b] && resp_m_q[b] == MW'(m);
    a_one_rsp: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(hits));
  end

endmodule
