// tb_divider: self-checking test of the iterative divider.
// Random and corner-case operands for div, divu, rem and remu are compared with the
// RISC-V definition (including division by zero and overflow). The latency from start_i
// to valid_o is measured and must stay inside the 2 to 32 cycle range the paper gives for
// its divider (counted here from the cycle after start_i, plus one result cycle), with
// small quotients and the special cases finishing early.
module tb_divider
  import riscv_pkg::*;
;
  logic clk = 0, rst_n = 0;
  logic start, busy, valid;
  div_op_e op;
  logic [31:0] a, b, res;
  int checks = 0, failures = 0, minlat = 1000, maxlat = 0;

  divider dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .op_i(op), .dividend_i(a),
    .divisor_i(b), .busy_o(busy), .valid_o(valid), .result_o(res));

  always #5 clk = ~clk;
  initial begin : watchdog
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] model(div_op_e o, logic [31:0] x, logic [31:0] y);
    case (o)
      DIV_DIV:  return (y == 0) ? 32'hFFFF_FFFF : (x == 32'h8000_0000 && y == 32'hFFFF_FFFF) ? x : 32'($signed(x) / $signed(y));
      DIV_DIVU: return (y == 0) ? 32'hFFFF_FFFF : x / y;
      DIV_REM:  return (y == 0) ? x : (x == 32'h8000_0000 && y == 32'hFFFF_FFFF) ? 32'd0 : 32'($signed(x) % $signed(y));
      default:  return (y == 0) ? x : x % y;
    endcase
  endfunction

  task automatic run(div_op_e o, logic [31:0] x, logic [31:0] y);
    int lat;
    @(negedge clk); op = o; a = x; b = y; start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!valid) begin @(negedge clk); lat++; end
    checks++;
    if (res !== model(o, x, y)) begin
      failures++; $display("op %0d %h %h: %h expected %h", o, x, y, res, model(o, x, y));
    end
    if (lat < minlat) minlat = lat;
    if (lat > maxlat) maxlat = lat;
  endtask

  initial begin
    start = 0; op = DIV_DIV; a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      logic [31:0] x, y;
      x = $urandom; y = $urandom >> ($urandom % 32);
      run(div_op_e'(t % 4), x, y);
    end
    for (int o = 0; o < 4; o++) begin
      run(div_op_e'(o), 32'h8000_0000, 32'hFFFF_FFFF);
      run(div_op_e'(o), 32'd1234, 32'd0);
      run(div_op_e'(o), 32'd7, 32'd9);
      run(div_op_e'(o), 32'hFFFF_FFFF, 32'd1);
    end
    checks++; if (minlat < 1) begin failures++; $display("latency %0d below 1", minlat); end
    checks++; if (maxlat > 33) begin failures++; $display("latency %0d above 32 + 1", maxlat); end
    checks++; if (maxlat - minlat < 16) begin failures++; $display("latency does not depend on operands"); end
    $display("divider latency %0d..%0d cycles", minlat, maxlat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
