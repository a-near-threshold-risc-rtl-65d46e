// tcdm_bank: one bank of the cluster's shared L1 data memory (TCDM).
//
// A bank is one 32b word wide and made of two parts, as in the paper's cluster: a
// standard-cell memory (SCM) of SCM_BYTES, which keeps working near threshold and
// costs less energy per access, and an SRAM of SRAM_BYTES for density. The lower
// SCM_BYTES/4 rows of the bank are the SCM, the rows above are the SRAM. Both parts
// are written here as plain arrays; a silicon implementation would put a latch array
// and an SRAM macro in their place.
//
// Timing: a request (req_i with row, write enable, byte enables and data) is served in
// the cycle it is presented (the interconnect has already arbitrated); read data is
// valid in the next cycle. Writes honour the byte enables.
module tcdm_bank #(
  parameter int unsigned SRAM_BYTES = 8192,
  parameter int unsigned SCM_BYTES  = 1024,
  parameter int unsigned ROWS       = (SRAM_BYTES + SCM_BYTES) / 4,
  parameter int unsigned AW         = $clog2(ROWS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [3:0]    be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);

  localparam int unsigned SCM_ROWS  = SCM_BYTES / 4;
  localparam int unsigned SRAM_ROWS = SRAM_BYTES / 4;

  logic [31:0] scm  [SCM_ROWS];
  logic [31:0] sram [SRAM_ROWS];
  logic        in_scm;
  logic [AW-1:0] sram_row;

  assign in_scm   = 32'(addr_i) < SCM_ROWS;
  assign sram_row = addr_i - AW'(SCM_ROWS);

  always_ff @(posedge clk_i) begin
    if (req_i && in_scm) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++) if (be_i[b]) scm[addr_i[$clog2(SCM_ROWS)-1:0]][8*b +: 8] <= wdata_i[8*b +: 8];
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (req_i && !in_scm) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++) if (be_i[b]) sram[sram_row[$clog2(SRAM_ROWS)-1:0]][8*b +: 8] <= wdata_i[8*b +: 8];
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (req_i && !we_i) rdata_o <= in_scm ? scm[addr_i[$clog2(SCM_ROWS)-1:0]] : sram[sram_row[$clog2(SRAM_ROWS)-1:0]];
  end

endmodule
