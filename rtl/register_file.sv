// register_file: the general purpose registers x0..x31 of the core.
//
// Three read ports (rA, rB, rC) feed the ID stage: the third one serves the
// accumulator of mac/sdotp, the old destination value of insert/shuffle2 and the offset
// register of register-offset stores. Two write ports follow the paper's pipeline: port
// A (DIA) takes results at the end of EX (ALU, multiplier, divider, CSR, the updated
// pointer of post-increment accesses) and port B (DIB) takes load data from the LSU in
// WB, so a load and an ALU operation never compete for a write port. If both ports
// write the same register in one cycle, port A wins: its instruction is the younger one.
// Reads are combinational and see the value written at the last clock edge; the core
// forwards same-cycle writes itself. x0 reads as zero. Flip-flop based, as a
// standard-cell memory would be.
module register_file #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned AW    = $clog2(NREGS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [AW-1:0] raddr_a_i,
  output logic [31:0]   rdata_a_o,
  input  logic [AW-1:0] raddr_b_i,
  output logic [31:0]   rdata_b_o,
  input  logic [AW-1:0] raddr_c_i,
  output logic [31:0]   rdata_c_o,
  input  logic          we_a_i,
  input  logic [AW-1:0] waddr_a_i,
  input  logic [31:0]   wdata_a_i,
  input  logic          we_b_i,
  input  logic [AW-1:0] waddr_b_i,
  input  logic [31:0]   wdata_b_i
);

  logic [31:0] mem_q [NREGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NREGS; i++) mem_q[i] <= '0;
    end else begin
      mem_q[0] <= '0;
      for (int i = 1; i < NREGS; i++) begin
        if (we_a_i && waddr_a_i == AW'(i))      mem_q[i] <= wdata_a_i;
        else if (we_b_i && waddr_b_i == AW'(i)) mem_q[i] <= wdata_b_i;
      end
    end
  end

  assign rdata_a_o = (raddr_a_i == '0) ? '0 : mem_q[raddr_a_i];
  assign rdata_b_o = (raddr_b_i == '0) ? '0 : mem_q[raddr_b_i];
  assign rdata_c_o = (raddr_c_i == '0) ? '0 : mem_q[raddr_c_i];

endmodule
