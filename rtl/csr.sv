// csr: control and status registers of the core (machine mode only).
//
// Implements csrrw/csrrs/csrrc and their immediate forms, executed in EX: rdata_o is
// the old value, written to rD through port A, and the new value is stored at the clock
// edge. Registers: mstatus (MIE/MPIE bits only), mtvec, mscratch, mepc, mcause, the
// 32b mcycle and minstret counters, the read-only mhartid (the core's index in the
// cluster) and the hardware-loop registers of both sets at 0x7B0 + 4*set + {0 start,
// 1 end, 2 count}. The hardware-loop registers live in the hwloop unit; this block reads
// them and forwards writes to it, which is how the paper maps them into the CSR space so
// that loops can be saved and restored around traps.
//
// A trap (trap_i, from the ID stage) stores the trapping PC in mepc and the cause in
// mcause; mret restores MIE. Which CSRs exist and their addresses beyond the hardware
// loops follow the RISC-V privileged specification; the paper does not list them.
module csr
  import riscv_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [3:0]  hart_id_i,
  // access from EX
  input  logic        en_i,
  input  csr_op_e     op_i,
  input  logic [11:0] addr_i,
  input  logic [31:0] wdata_i,
  output logic [31:0] rdata_o,
  // traps
  input  logic        trap_i,
  input  logic [31:0] trap_pc_i,
  input  logic [4:0]  trap_cause_i,
  input  logic        mret_i,
  output logic [31:0] mtvec_o,
  output logic [31:0] mepc_o,
  // counters
  input  logic        instret_i,
  // hardware loop registers
  input  logic [31:0] hwlp_start_i [2],
  input  logic [31:0] hwlp_end_i   [2],
  input  logic [31:0] hwlp_count_i [2],
  output logic        hwlp_we_o,
  output logic        hwlp_set_o,
  output logic [1:0]  hwlp_reg_o,
  output logic [31:0] hwlp_wdata_o
);

  logic [31:0] mtvec_q, mscratch_q, mepc_q, mcycle_q, minstret_q;
  logic [4:0]  mcause_q;
  logic        mie_q, mpie_q;
  logic [31:0] wval;
  logic        is_hwlp, we;

  always_comb begin
    is_hwlp = addr_i[11:3] == CSR_HWLP_BASE[11:3] && addr_i[1:0] != 2'b11;
    unique case (addr_i)
      CSR_MSTATUS:  rdata_o = {24'd0, mpie_q, 3'd0, mie_q, 3'd0};
      CSR_MTVEC:    rdata_o = mtvec_q;
      CSR_MSCRATCH: rdata_o = mscratch_q;
      CSR_MEPC:     rdata_o = mepc_q;
      CSR_MCAUSE:   rdata_o = {27'd0, mcause_q};
      CSR_MCYCLE:   rdata_o = mcycle_q;
      CSR_MINSTRET: rdata_o = minstret_q;
      CSR_MHARTID:  rdata_o = {28'd0, hart_id_i};
      default: begin
        rdata_o = '0;
        if (is_hwlp) begin
          unique case (addr_i[1:0])
            2'd0:    rdata_o = hwlp_start_i[addr_i[2]];
            2'd1:    rdata_o = hwlp_end_i[addr_i[2]];
            default: rdata_o = hwlp_count_i[addr_i[2]];
          endcase
        end
      end
    endcase
    unique case (op_i)
      CSR_WRITE: wval = wdata_i;
      CSR_SET:   wval = rdata_o | wdata_i;
      CSR_CLEAR: wval = rdata_o & ~wdata_i;
      default:   wval = rdata_o;
    endcase
    we           = en_i && op_i != CSR_NONE;
    hwlp_we_o    = we && is_hwlp;
    hwlp_set_o   = addr_i[2];
    hwlp_reg_o   = addr_i[1:0];
    hwlp_wdata_o = wval;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mtvec_q    <= '0;
      mscratch_q <= '0;
      mepc_q     <= '0;
      mcause_q   <= '0;
      mcycle_q   <= '0;
      minstret_q <= '0;
      mie_q      <= 1'b0;
      mpie_q     <= 1'b0;
    end else begin
      mcycle_q   <= mcycle_q + 32'd1;
      minstret_q <= minstret_q + 32'(instret_i);
      if (we) begin
        unique case (addr_i)
          CSR_MSTATUS:  begin mie_q <= wval[3]; mpie_q <= wval[7]; end
          CSR_MTVEC:    mtvec_q    <= {wval[31:2], 2'b00};
          CSR_MSCRATCH: mscratch_q <= wval;
          CSR_MEPC:     mepc_q     <= {wval[31:1], 1'b0};
          CSR_MCAUSE:   mcause_q   <= wval[4:0];
          CSR_MCYCLE:   mcycle_q   <= wval;
          CSR_MINSTRET: minstret_q <= wval;
          default: ;
        endcase
      end
      if (trap_i) begin
        mepc_q   <= trap_pc_i;
        mcause_q <= trap_cause_i;
        mpie_q   <= mie_q;
        mie_q    <= 1'b0;
      end else if (mret_i) begin
        mie_q  <= mpie_q;
        mpie_q <= 1'b1;
      end
    end
  end

  assign mtvec_o = mtvec_q;
  assign mepc_o  = mepc_q;

endmodule
