// lsu: load-store unit with hardware support for misaligned accesses.
//
// The request is issued in EX and the data returns in WB, one cycle or more later, on
// the req/gnt/rvalid protocol of the TCDM: the request with address, write enable, byte
// enables and data is held until data_gnt_i; data_rvalid_i with data_rdata_i answers
// each granted request in order. One request is outstanding at a time; a new one is
// issued in the cycle the previous answer arrives.
//
// Byte, halfword and word accesses at any address: an access that does not fit into
// one aligned word (a word not at a multiple of 4, a halfword at offset 3) is split as
// the paper describes. The first request goes to the higher word and its data is kept in
// a temporary register; the second goes to the lower word, and its data is combined on
// the fly with the temporary register, shifted, sign- or zero-extended and handed to the
// register file's LSU write port. A misaligned access therefore takes two cycles in EX.
// Stores are split the same way, each part with its own byte enables.
//
// EX side: req_i is held with stable operands until ex_ready_o (last part granted).
// WB side: rvalid_o/rdata_o deliver the load result; wb_wait_o is high while an answer
// is still missing, and the pipeline stalls on it.
module lsu
  import riscv_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // from EX
  input  logic        req_i,
  input  logic        we_i,
  input  lsu_size_e   size_i,
  input  logic        signed_i,
  input  logic [31:0] addr_i,
  input  logic [31:0] wdata_i,
  output logic        ex_ready_o,
  output logic        misaligned_o,     // a misaligned access was started (statistics)
  // to WB
  output logic        rvalid_o,
  output logic [31:0] rdata_o,
  output logic        wb_wait_o,
  // data memory interface
  output logic        data_req_o,
  output logic [31:0] data_addr_o,
  output logic        data_we_o,
  output logic [3:0]  data_be_o,
  output logic [31:0] data_wdata_o,
  input  logic        data_gnt_i,
  input  logic        data_rvalid_i,
  input  logic [31:0] data_rdata_i
);

  logic        outstanding_q, final_q, mis_q, wb_signed_q;
  logic [1:0]  wb_off_q;
  lsu_size_e   wb_size_q;
  logic [31:0] hi_q;

  logic        misaligned, can_issue;
  logic [1:0]  off;
  logic [3:0]  size_mask;
  logic [7:0]  be64;
  logic [63:0] wdata64;

  always_comb begin
    off = addr_i[1:0];
    unique case (size_i)
      LSU_BYTE: size_mask = 4'b0001;
      LSU_HALF: size_mask = 4'b0011;
      default:  size_mask = 4'b1111;
    endcase
    misaligned = (size_i == LSU_WORD && off != 2'd0) || (size_i == LSU_HALF && off == 2'd3);
    be64       = {4'd0, size_mask} << off;
    wdata64    = {32'd0, wdata_i} << (8 * off);
    can_issue  = !outstanding_q || data_rvalid_i;

    data_req_o   = req_i && can_issue;
    data_we_o    = we_i;
    if (misaligned && !mis_q) begin       // first part: the higher word
      data_addr_o  = {addr_i[31:2] + 30'd1, 2'b00};
      data_be_o    = be64[7:4];
      data_wdata_o = wdata64[63:32];
    end else begin                        // aligned access or second part: the lower word
      data_addr_o  = {addr_i[31:2], 2'b00};
      data_be_o    = be64[3:0];
      data_wdata_o = wdata64[31:0];
    end
    ex_ready_o   = data_req_o && data_gnt_i && (!misaligned || mis_q);
    misaligned_o = data_req_o && data_gnt_i && misaligned && !mis_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      outstanding_q <= 1'b0;
      final_q       <= 1'b0;
      mis_q         <= 1'b0;
      wb_signed_q   <= 1'b0;
      wb_off_q      <= '0;
      wb_size_q     <= LSU_WORD;
      hi_q          <= '0;
    end else begin
      if (data_rvalid_i && outstanding_q && !final_q) hi_q <= data_rdata_i;
      if (data_req_o && data_gnt_i) begin
        outstanding_q <= 1'b1;
        final_q       <= !misaligned || mis_q;
        mis_q         <= misaligned && !mis_q;
        wb_off_q      <= off;
        wb_size_q     <= size_i;
        wb_signed_q   <= signed_i;
      end else if (data_rvalid_i) begin
        outstanding_q <= 1'b0;
      end
    end
  end

  logic [63:0] comb64;
  logic [31:0] shifted;
  always_comb begin
    comb64    = {hi_q, data_rdata_i};
    shifted   = 32'(comb64 >> (8 * wb_off_q));
    unique case (wb_size_q)
      LSU_BYTE: rdata_o = {{24{wb_signed_q & shifted[7]}}, shifted[7:0]};
      LSU_HALF: rdata_o = {{16{wb_signed_q & shifted[15]}}, shifted[15:0]};
      default:  rdata_o = shifted;
    endcase
    rvalid_o  = data_rvalid_i && outstanding_q && final_q;
    wb_wait_o = outstanding_q && !data_rvalid_i;
  end

  // a request, once raised, is held until it is granted
  property p_req_hold;
    @(posedge clk_i) disable iff (!rst_ni) (data_req_o && !data_gnt_i) |=> data_req_o;
  endproperty
  a_req_hold: assert property (p_req_hold);

endmodule
