// pulp_cluster: a PULP cluster of N_CORES DSP-extended RISC-V cores around a shared L1.
//
// The cluster of the paper's evaluation: four cores, each with its L0 prefetch buffer,
// fetch through one shared 4 kB instruction cache of four banks, and read and write data
// in a 72 kB tightly coupled data memory (TCDM) of eight word-interleaved banks, each
// made of 8 kB SRAM and 1 kB SCM. A per-core demultiplexer sends data requests either to
// the logarithmic interconnect in front of the banks or out of the cluster to the
// peripheral interconnect. The interconnect has one more master port for the cluster's
// DMA engine.
//
// Address map (this design's): TCDM at TCDM_BASE, 72 kB, word i of the TCDM in bank
// i mod 8; everything else is peripheral space. Core k has mhartid k.
// Not inside this module: the DMA engine, the peripheral interconnect and peripherals,
// the cluster bus towards L2 and the debug unit. Their connections are ports: the DMA
// master port (dma_req_i/dma_rsp_o), one peripheral port per core (peri_*), the I$
// refill port (l2_*) and a halt input per core. Per-cycle events of each core, TCDM
// contentions per master and I$ misses per bank come out for performance counting.
// Lint reports a combinational loop through each core's data request and the response
// structs: it exists only at struct granularity (the grant depends on the request, the
// request on the registered rvalid), so no real combinational cycle is closed.
module pulp_cluster
  import riscv_pkg::*;
#(
  parameter int unsigned N_CORES     = 4,
  parameter int unsigned N_BANKS     = 8,
  parameter int unsigned SRAM_BYTES  = 8192,
  parameter int unsigned SCM_BYTES   = 1024,
  parameter int unsigned ICACHE_BYTES = 4096,
  parameter int unsigned ICACHE_BANKS = 4,
  parameter logic [31:0] TCDM_BASE   = 32'h1000_0000
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [31:0]  boot_addr_i,
  input  logic         fetch_enable_i [N_CORES],
  input  logic         dbg_halt_i     [N_CORES],
  // instruction refill from L2
  output logic         l2_req_o,
  output logic [31:0]  l2_addr_o,
  input  logic         l2_gnt_i,
  input  logic         l2_rvalid_i,
  input  logic [127:0] l2_rdata_i,
  // DMA master port into the TCDM
  input  mem_req_t     dma_req_i,
  output mem_rsp_t     dma_rsp_o,
  // peripheral ports
  output mem_req_t     peri_req_o [N_CORES],
  input  mem_rsp_t     peri_rsp_i [N_CORES],
  // statistics
  output core_events_t events_o [N_CORES],
  output logic         tcdm_contention_o [N_CORES+1],
  output logic         icache_miss_o [ICACHE_BANKS]
);

  localparam int unsigned BANK_BYTES = SRAM_BYTES + SCM_BYTES;
  localparam int unsigned ROWS       = BANK_BYTES / 4;
  localparam int unsigned ROW_AW     = $clog2(ROWS);
  localparam logic [31:0] TCDM_SIZE  = 32'(N_BANKS * BANK_BYTES);

  // ---------------------------------------------------------------- cores
  logic         ic_req [N_CORES], ic_gnt [N_CORES], ic_rvalid [N_CORES];
  logic [31:0]  ic_addr [N_CORES];
  logic [127:0] ic_rdata [N_CORES];
  mem_req_t     core_req [N_CORES], tcdm_req [N_CORES+1];
  mem_rsp_t     core_rsp [N_CORES], tcdm_rsp [N_CORES+1];

  for (genvar k = 0; k < N_CORES; k++) begin : g_core
    riscv_core u_core (
      .clk_i, .rst_ni,
      .hart_id_i      (4'(k)),
      .boot_addr_i,
      .fetch_enable_i (fetch_enable_i[k]),
      .dbg_halt_i     (dbg_halt_i[k]),
      .instr_req_o    (ic_req[k]),
      .instr_addr_o   (ic_addr[k]),
      .instr_gnt_i    (ic_gnt[k]),
      .instr_rvalid_i (ic_rvalid[k]),
      .instr_rdata_i  (ic_rdata[k]),
      .data_req_o     (core_req[k].req),
      .data_addr_o    (core_req[k].addr),
      .data_we_o      (core_req[k].we),
      .data_be_o      (core_req[k].be),
      .data_wdata_o   (core_req[k].wdata),
      .data_gnt_i     (core_rsp[k].gnt),
      .data_rvalid_i  (core_rsp[k].rvalid),
      .data_rdata_i   (core_rsp[k].rdata),
      .events_o       (events_o[k])
    );

    periph_demux #(.TCDM_BASE(TCDM_BASE), .TCDM_SIZE(TCDM_SIZE)) u_demux (
      .clk_i, .rst_ni,
      .core_req_i (core_req[k]),
      .core_rsp_o (core_rsp[k]),
      .tcdm_req_o (tcdm_req[k]),
      .tcdm_rsp_i (tcdm_rsp[k]),
      .peri_req_o (peri_req_o[k]),
      .peri_rsp_i (peri_rsp_i[k])
    );
  end

  assign tcdm_req[N_CORES] = dma_req_i;
  assign dma_rsp_o         = tcdm_rsp[N_CORES];

  // ---------------------------------------------------------------- shared I$
  shared_icache #(.N_CORES(N_CORES), .N_BANKS(ICACHE_BANKS), .CACHE_BYTES(ICACHE_BYTES)) u_icache (
    .clk_i, .rst_ni,
    .req_i    (ic_req),
    .addr_i   (ic_addr),
    .gnt_o    (ic_gnt),
    .rvalid_o (ic_rvalid),
    .rdata_o  (ic_rdata),
    .l2_req_o, .l2_addr_o, .l2_gnt_i, .l2_rvalid_i, .l2_rdata_i,
    .miss_o   (icache_miss_o)
  );

  // ---------------------------------------------------------------- TCDM
  logic              b_req [N_BANKS], b_we [N_BANKS];
  logic [3:0]        b_be [N_BANKS];
  logic [ROW_AW-1:0] b_addr [N_BANKS];
  logic [31:0]       b_wdata [N_BANKS], b_rdata [N_BANKS];

  log_interconnect #(.N_MASTERS(N_CORES + 1), .N_BANKS(N_BANKS), .ROW_AW(ROW_AW)) u_xbar (
    .clk_i, .rst_ni,
    .m_req_i      (tcdm_req),
    .m_rsp_o      (tcdm_rsp),
    .contention_o (tcdm_contention_o),
    .b_req_o      (b_req),
    .b_we_o       (b_we),
    .b_be_o       (b_be),
    .b_addr_o     (b_addr),
    .b_wdata_o    (b_wdata),
    .b_rdata_i    (b_rdata)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    tcdm_bank #(.SRAM_BYTES(SRAM_BYTES), .SCM_BYTES(SCM_BYTES)) u_bank (
      .clk_i,
      .req_i   (b_req[b]),
      .we_i    (b_we[b]),
      .be_i    (b_be[b]),
      .addr_i  (b_addr[b]),
      .wdata_i (b_wdata[b]),
      .rdata_o (b_rdata[b])
    );
  end

endmodule
