// tb_riscv_core: self-checking program test of one core.
//
// The core runs the program of tb_prog_pkg from an instruction memory model that returns
// 128b lines one cycle after the grant, and accesses a data memory model that grants
// after a random 0-2 cycle delay and answers one cycle after the grant. The result words
// the program stores are compared with tb_prog_pkg::expected(), the end-of-computation
// store must arrive with mhartid, and each mechanism the program is meant to exercise
// (hardware-loop jump, misaligned split, load-use stall, taken branch, compressed
// instruction, line-crossing instruction, divider stall) must have been reported by the
// core's event outputs at least once. The hardware loop must also run its body with no
// overhead: 16 iterations of 3 instructions may not take more than 3 cycles each plus
// the stalls reported.
module tb_riscv_core
  import riscv_pkg::*;
  import tb_prog_pkg::*;
;
  logic clk = 0, rst_n = 0;
  logic         instr_req, instr_gnt, instr_rvalid;
  logic [31:0]  instr_addr;
  logic [127:0] instr_rdata;
  logic         data_req, data_we, data_gnt, data_rvalid;
  logic [31:0]  data_addr, data_wdata, data_rdata;
  logic [3:0]   data_be;
  core_events_t ev;
  int checks = 0, failures = 0;
  prog_t prog;
  logic [31:0] mem [16384];       // 64 kB at 0x1000_0000
  logic [31:0] va [N_WORDS], vb [N_WORDS], exp_r [N_RES];
  int n_hwlp = 0, n_mis = 0, n_lu = 0, n_br = 0, n_c = 0, n_cross = 0, n_ex = 0, n_ret = 0;
  logic eoc = 0;
  logic [31:0] eoc_val;

  riscv_core dut (.clk_i(clk), .rst_ni(rst_n), .hart_id_i(4'd0), .boot_addr_i(BOOT),
    .fetch_enable_i(1'b1), .dbg_halt_i(1'b0),
    .instr_req_o(instr_req), .instr_addr_o(instr_addr), .instr_gnt_i(instr_gnt),
    .instr_rvalid_i(instr_rvalid), .instr_rdata_i(instr_rdata),
    .data_req_o(data_req), .data_addr_o(data_addr), .data_we_o(data_we), .data_be_o(data_be),
    .data_wdata_o(data_wdata), .data_gnt_i(data_gnt), .data_rvalid_i(data_rvalid),
    .data_rdata_i(data_rdata), .events_o(ev));

  always #5 clk = ~clk;
  initial begin : watchdog
    #200000; failures++;
    $display("watchdog: program did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [127:0] line_at(logic [31:0] addr);
    logic [127:0] l;
    for (int i = 0; i < 8; i++) begin
      int idx;
      idx = int'((addr - BOOT) >> 1) + i;
      l[16*i +: 16] = (idx >= 0 && idx < prog.n) ? prog.h[idx] : 16'h0001;   // c.nop filler
    end
    return l;
  endfunction

  // instruction memory: grant at once, line one cycle later
  assign instr_gnt = instr_req;
  always_ff @(posedge clk) begin
    instr_rvalid <= instr_req && instr_gnt;
    if (instr_req) instr_rdata <= line_at({instr_addr[31:4], 4'd0});
  end

  // data memory: random grant delay
  int wait_cnt = 0;
  always_ff @(posedge clk) begin
    if (!data_req || data_gnt) wait_cnt <= $urandom % 3;
    else if (wait_cnt > 0)     wait_cnt <= wait_cnt - 1;
  end
  assign data_gnt = data_req && wait_cnt == 0;
  always_ff @(posedge clk) begin
    data_rvalid <= data_req && data_gnt;
    if (data_req && data_gnt) begin
      if (data_addr == EOC_ADDR) begin
        if (data_we) begin eoc <= 1'b1; eoc_val <= data_wdata; end
        data_rdata <= '0;
      end else begin
        data_rdata <= mem[data_addr[15:2]];
        if (data_we)
          for (int i = 0; i < 4; i++) if (data_be[i]) mem[data_addr[15:2]][8*i +: 8] <= data_wdata[8*i +: 8];
      end
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    n_hwlp  <= n_hwlp + int'(ev.hwlp_jump);
    n_mis   <= n_mis + int'(ev.misaligned);
    n_lu    <= n_lu + int'(ev.load_use_stall);
    n_br    <= n_br + int'(ev.branch_taken);
    n_c     <= n_c + int'(ev.compressed);
    n_cross <= n_cross + int'(ev.line_cross);
    n_ex    <= n_ex + int'(ev.ex_stall);
    n_ret   <= n_ret + int'(ev.instr_retired);
  end

  task automatic count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
    else $display("%-22s %0d", what, n);
  endtask

  initial begin
    build(prog);
    for (int i = 0; i < 16384; i++) mem[i] = 0;
    for (int i = 0; i < N_WORDS; i++) begin
      va[i] = $urandom; vb[i] = $urandom;
      mem[(VEC_A[15:0] >> 2) + i] = va[i];
      mem[(VEC_B[15:0] >> 2) + i] = vb[i];
    end
    expected(va, vb, exp_r);
    repeat (3) @(posedge clk); rst_n = 1;
    wait (eoc);
    repeat (5) @(posedge clk);
    checks++; if (eoc_val !== 32'd0) begin failures++; $display("eoc value %h", eoc_val); end
    for (int i = 0; i < N_RES; i++) begin
      checks++;
      if (mem[(RES_BASE[15:0] >> 2) + i] !== exp_r[i]) begin
        failures++; $display("result %0d: %h expected %h", i, mem[(RES_BASE[15:0] >> 2) + i], exp_r[i]);
      end
    end
    count("hardware-loop jumps", n_hwlp);
    count("misaligned accesses", n_mis);
    count("load-use stalls", n_lu);
    count("taken branches", n_br);
    count("compressed", n_c);
    count("line-crossing fetches", n_cross);
    count("EX stalls", n_ex);
    checks++; if (n_hwlp != N_WORDS - 1) begin failures++; $display("hwloop jumps %0d, expected %0d", n_hwlp, N_WORDS - 1); end
    $display("retired %0d instructions", n_ret);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
