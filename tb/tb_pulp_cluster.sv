// tb_pulp_cluster: end-to-end test of the full cluster at its default size.
//
// Four cores boot at the same address and run the program of tb_prog_pkg (same code,
// hart-specific result area), fetching through the shared instruction cache from an L2
// model that grants at once and returns a 128b line two cycles later, and working on data
// in the TCDM. The testbench preloads the two input vectors into the TCDM banks through
// the DMA master port (word i of the TCDM lives in bank i mod 8), collects each core's
// end-of-computation store on its peripheral port, then reads the result words back
// through the DMA port and compares them with tb_prog_pkg::expected(). Every mechanism
// of the cluster must have happened at least once: I$ misses, TCDM bank contention,
// hardware-loop jumps, misaligned splits, load-use stalls, taken branches, compressed
// instructions, line-crossing fetches and EX stalls (divider); one that never happened
// counts as a failure.
module tb_pulp_cluster
  import riscv_pkg::*;
  import tb_prog_pkg::*;
;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  logic fetch_en [NC], halt [NC];
  logic l2_req, l2_gnt, l2_rvalid;
  logic [31:0] l2_addr;
  logic [127:0] l2_rdata;
  mem_req_t dma_req;
  mem_rsp_t dma_rsp;
  mem_req_t peri_req [NC];
  mem_rsp_t peri_rsp [NC];
  core_events_t ev [NC];
  logic contention [NC+1];
  logic ic_miss [4];
  int checks = 0, failures = 0;
  prog_t prog;
  logic [31:0] va [N_WORDS], vb [N_WORDS], exp_r [N_RES];
  logic eoc [NC];
  logic [31:0] eoc_val [NC];
  int n_hwlp = 0, n_mis = 0, n_lu = 0, n_br = 0, n_c = 0, n_cross = 0, n_ex = 0, n_cont = 0, n_miss = 0;

  pulp_cluster dut (.clk_i(clk), .rst_ni(rst_n), .boot_addr_i(BOOT), .fetch_enable_i(fetch_en),
    .dbg_halt_i(halt), .l2_req_o(l2_req), .l2_addr_o(l2_addr), .l2_gnt_i(l2_gnt),
    .l2_rvalid_i(l2_rvalid), .l2_rdata_i(l2_rdata), .dma_req_i(dma_req), .dma_rsp_o(dma_rsp),
    .peri_req_o(peri_req), .peri_rsp_i(peri_rsp), .events_o(ev),
    .tcdm_contention_o(contention), .icache_miss_o(ic_miss));

  always #5 clk = ~clk;
  initial begin : watchdog
    #400000; failures++;
    $display("watchdog: cluster did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [127:0] line_at(logic [31:0] addr);
    logic [127:0] l;
    for (int i = 0; i < 8; i++) begin
      int idx;
      idx = int'((addr - BOOT) >> 1) + i;
      l[16*i +: 16] = (idx >= 0 && idx < prog.n) ? prog.h[idx] : 16'h0001;
    end
    return l;
  endfunction

  // L2: grant at once, line two cycles later
  logic        l2_p1, l2_p2;
  logic [31:0] l2_a1;
  assign l2_gnt = l2_req;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l2_p1 <= 1'b0; l2_p2 <= 1'b0; l2_rvalid <= 1'b0;
    end else begin
      l2_p1 <= l2_req && l2_gnt;
      if (l2_req) l2_a1 <= l2_addr;
      l2_rvalid <= l2_p1;
      if (l2_p1) l2_rdata <= line_at(l2_a1);
    end
  end

  // peripherals: grant at once, answer next cycle, capture the end-of-computation store
  for (genvar k = 0; k < NC; k++) begin : g_peri
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        peri_rsp[k].rvalid <= 1'b0;
        eoc[k] <= 1'b0;
      end else begin
        peri_rsp[k].rvalid <= peri_req[k].req;
        if (peri_req[k].req && peri_req[k].we && peri_req[k].addr == EOC_ADDR) begin
          eoc[k] <= 1'b1; eoc_val[k] <= peri_req[k].wdata;
        end
      end
    end
    assign peri_rsp[k].gnt   = peri_req[k].req;
    assign peri_rsp[k].rdata = '0;
  end

  always_ff @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NC; k++) begin
      n_hwlp  <= n_hwlp + int'(ev[0].hwlp_jump) + int'(ev[1].hwlp_jump) + int'(ev[2].hwlp_jump) + int'(ev[3].hwlp_jump);
      n_mis   <= n_mis + int'(ev[0].misaligned) + int'(ev[1].misaligned) + int'(ev[2].misaligned) + int'(ev[3].misaligned);
      n_lu    <= n_lu + int'(ev[0].load_use_stall) + int'(ev[1].load_use_stall) + int'(ev[2].load_use_stall) + int'(ev[3].load_use_stall);
      n_br    <= n_br + int'(ev[0].branch_taken) + int'(ev[1].branch_taken) + int'(ev[2].branch_taken) + int'(ev[3].branch_taken);
      n_c     <= n_c + int'(ev[0].compressed) + int'(ev[1].compressed) + int'(ev[2].compressed) + int'(ev[3].compressed);
      n_cross <= n_cross + int'(ev[0].line_cross) + int'(ev[1].line_cross) + int'(ev[2].line_cross) + int'(ev[3].line_cross);
      n_ex    <= n_ex + int'(ev[0].ex_stall) + int'(ev[1].ex_stall) + int'(ev[2].ex_stall) + int'(ev[3].ex_stall);
    end
    n_cont <= n_cont + int'(contention[0]) + int'(contention[1]) + int'(contention[2]) + int'(contention[3]);
    n_miss <= n_miss + int'(ic_miss[0]) + int'(ic_miss[1]) + int'(ic_miss[2]) + int'(ic_miss[3]);
  end

  task automatic dma_access(logic we, logic [31:0] addr, logic [31:0] wdata, output logic [31:0] rdata);
    @(negedge clk);
    dma_req.req = 1'b1; dma_req.we = we; dma_req.addr = addr; dma_req.be = 4'hF; dma_req.wdata = wdata;
    @(posedge clk);
    while (!dma_rsp.gnt) @(posedge clk);
    @(negedge clk); dma_req.req = 1'b0;
    while (!dma_rsp.rvalid) @(negedge clk);
    rdata = dma_rsp.rdata;
  endtask

  task automatic count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
    else $display("%-22s %0d", what, n);
  endtask

  initial begin
    logic [31:0] d;
    build(prog);
    dma_req = '0;
    for (int k = 0; k < NC; k++) begin fetch_en[k] = 1'b0; halt[k] = 1'b0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // preload the vectors and clear the result areas through the DMA port
    for (int i = 0; i < N_WORDS; i++) begin
      va[i] = $urandom; vb[i] = $urandom;
      dma_access(1'b1, VEC_A + 32'(4 * i), va[i], d);
      dma_access(1'b1, VEC_B + 32'(4 * i), vb[i], d);
    end
    for (int k = 0; k < NC; k++)
      for (int i = 0; i < N_RES; i++) dma_access(1'b1, RES_BASE + 32'(256 * k + 4 * i), 32'hDEAD_BEEF, d);
    checks++; dma_access(1'b0, VEC_B + 32'd4, 32'd0, d);
    if (d !== vb[1]) begin failures++; $display("DMA read back %h expected %h", d, vb[1]); end
    expected(va, vb, exp_r);
    for (int k = 0; k < NC; k++) fetch_en[k] = 1'b1;
    wait (eoc[0] && eoc[1] && eoc[2] && eoc[3]);
    repeat (10) @(posedge clk);
    for (int k = 0; k < NC; k++) begin
      checks++; if (eoc_val[k] !== 32'(k)) begin failures++; $display("core %0d eoc value %h", k, eoc_val[k]); end
      for (int i = 0; i < N_RES; i++) begin
        checks++;
        dma_access(1'b0, RES_BASE + 32'(256 * k + 4 * i), 32'd0, d);
        if (d !== exp_r[i]) begin failures++; $display("core %0d result %0d: %h expected %h", k, i, d, exp_r[i]); end
      end
    end
    count("I$ misses", n_miss);
    count("TCDM contentions", n_cont);
    count("hardware-loop jumps", n_hwlp);
    count("misaligned accesses", n_mis);
    count("load-use stalls", n_lu);
    count("taken branches", n_br);
    count("compressed", n_c);
    count("line-crossing fetches", n_cross);
    count("EX stalls", n_ex);
    checks++; if (n_hwlp != NC * (N_WORDS - 1)) begin failures++; $display("hwloop jumps %0d", n_hwlp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
