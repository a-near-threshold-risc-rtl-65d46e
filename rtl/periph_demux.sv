// periph_demux: per-core data demultiplexer in front of the core's data port.
//
// A request whose address lies in the TCDM window [TCDM_BASE, TCDM_BASE + TCDM_SIZE)
// goes to the logarithmic interconnect; every other request goes to the peripheral
// interconnect. The grant comes from the side that was addressed. The port of the last
// granted request is remembered so that its answer (rvalid, rdata) is taken from the
// same side; the core keeps one request outstanding, so one bit suffices. The paper
// shows the demultiplexers in its cluster figure; the address map is this design's.
module periph_demux
  import riscv_pkg::*;
#(
  parameter logic [31:0] TCDM_BASE = 32'h1000_0000,
  parameter logic [31:0] TCDM_SIZE = 32'h0001_2000
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t core_req_i,
  output mem_rsp_t core_rsp_o,
  output mem_req_t tcdm_req_o,
  input  mem_rsp_t tcdm_rsp_i,
  output mem_req_t peri_req_o,
  input  mem_rsp_t peri_rsp_i
);

  logic to_tcdm, last_tcdm_q;

  always_comb begin
    to_tcdm        = core_req_i.addr >= TCDM_BASE && core_req_i.addr - TCDM_BASE < TCDM_SIZE;
    tcdm_req_o     = core_req_i;
    peri_req_o     = core_req_i;
    tcdm_req_o.req = core_req_i.req && to_tcdm;
    peri_req_o.req = core_req_i.req && !to_tcdm;
    core_rsp_o.gnt    = to_tcdm ? tcdm_rsp_i.gnt : peri_rsp_i.gnt;
    core_rsp_o.rvalid = last_tcdm_q ? tcdm_rsp_i.rvalid : peri_rsp_i.rvalid;
    core_rsp_o.rdata  = last_tcdm_q ? tcdm_rsp_i.rdata : peri_rsp_i.rdata;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                                 last_tcdm_q <= 1'b1;
    else if (core_req_i.req && core_rsp_o.gnt)   last_tcdm_q <= to_tcdm;
  end

endmodule
