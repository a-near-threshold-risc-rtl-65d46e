// tb_register_file: self-checking test of the three-read, two-write register file.
// Random writes through ports A and B are mirrored in a reference array and read back on
// all three read ports; x0 must stay zero and port A must win a same-register collision.
// Writes take effect at the clock edge, reads are combinational.
module tb_register_file;
  logic clk = 0, rst_n = 0;
  logic [4:0] ra, rb, rc, wa, wb;
  logic [31:0] da, db, qa, qb, qc, dwa, dwb;
  logic wea, web;
  logic [31:0] ref_q [32];
  int checks = 0, failures = 0;

  register_file dut (.clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .rdata_a_o(qa),
    .raddr_b_i(rb), .rdata_b_o(qb), .raddr_c_i(rc), .rdata_c_o(qc),
    .we_a_i(wea), .waddr_a_i(wa), .wdata_a_i(dwa), .we_b_i(web), .waddr_b_i(wb), .wdata_b_i(dwb));

  always #5 clk = ~clk;
  initial begin : watchdog
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wea = 0; web = 0; wa = 0; wb = 0; dwa = 0; dwb = 0; ra = 0; rb = 0; rc = 0;
    for (int i = 0; i < 32; i++) ref_q[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wea = 1'($urandom); web = 1'($urandom);
      wa = 5'($urandom); wb = (t % 7 == 0) ? wa : 5'($urandom);
      dwa = $urandom; dwb = $urandom;
      @(posedge clk); #1;
      if (web && wb != 0) ref_q[wb] = dwb;
      if (wea && wa != 0) ref_q[wa] = dwa;
      wea = 0; web = 0;
      for (int r = 0; r < 3; r++) begin
        ra = 5'($urandom); rb = 5'($urandom); rc = 5'($urandom); #1;
        checks++; if (qa !== ref_q[ra]) begin failures++; $display("port a x%0d %h != %h", ra, qa, ref_q[ra]); end
        checks++; if (qb !== ref_q[rb]) failures++;
        checks++; if (qc !== ref_q[rc]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
