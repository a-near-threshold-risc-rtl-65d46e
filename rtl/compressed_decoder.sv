// compressed_decoder: expands 16b RVC instructions into their 32b RV32 equivalents.
//
// It sits in the IF stage between the L0 prefetch buffer and the IF/ID register, so the
// rest of the pipeline only sees 32b instructions. An instruction whose two low bits are
// 11 passes unchanged; any other is compressed and is mapped by the RVC tables of the
// RISC-V specification (RV32C: quadrants 0, 1 and 2, no floating point). Encodings that
// are reserved or not RV32C raise illegal_o. The paper states only that such a decoder
// detects and decompresses RVC; the mapping itself is the standard one. Combinational.
module compressed_decoder (
  input  logic [31:0] instr_i,
  output logic [31:0] instr_o,
  output logic        is_compressed_o,
  output logic        illegal_o
);

  localparam logic [6:0] OP_LOAD = 7'h03, OP_STORE = 7'h23, OP_IMM = 7'h13, OP_OP = 7'h33,
                         OP_LUI = 7'h37, OP_BR = 7'h63, OP_JALR = 7'h67, OP_JAL = 7'h6F;

  logic [15:0] c;
  logic [4:0]  rdp, rs2p;
  assign c    = instr_i[15:0];
  assign rdp  = {2'b01, c[4:2]};
  assign rs2p = {2'b01, c[4:2]};
  logic [4:0]  rs1p;
  assign rs1p = {2'b01, c[9:7]};

  logic [20:0] jimm;
  logic [12:0] bimm;
  assign jimm = {{10{c[12]}}, c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0};
  assign bimm = {{5{c[12]}}, c[6:5], c[2], c[11:10], c[4:3], 1'b0};

  always_comb begin
    illegal_o       = 1'b0;
    is_compressed_o = instr_i[1:0] != 2'b11;
    instr_o         = instr_i;
    unique case (instr_i[1:0])
      2'b00: begin
        unique case (c[15:13])
          3'b000: begin  // c.addi4spn
            instr_o = {2'b0, c[10:7], c[12:11], c[5], c[6], 2'b00, 5'd2, 3'b000, rdp, OP_IMM};
            if (c[12:5] == 8'd0) illegal_o = 1'b1;
          end
          3'b010:  instr_o = {5'b0, c[5], c[12:10], c[6], 2'b00, rs1p, 3'b010, rdp, OP_LOAD};   // c.lw
          3'b110:  instr_o = {5'b0, c[5], c[12], rs2p, rs1p, 3'b010, c[11:10], c[6], 2'b00, OP_STORE}; // c.sw
          default: illegal_o = 1'b1;
        endcase
      end
      2'b01: begin
        unique case (c[15:13])
          3'b000: instr_o = {{7{c[12]}}, c[6:2], c[11:7], 3'b000, c[11:7], OP_IMM};        // c.addi / c.nop
          3'b001, 3'b101:                                                                  // c.jal / c.j
            instr_o = {jimm[20], jimm[10:1], jimm[11], jimm[19:12], c[15] ? 5'd0 : 5'd1, OP_JAL};
          3'b010: instr_o = {{7{c[12]}}, c[6:2], 5'd0, 3'b000, c[11:7], OP_IMM};           // c.li
          3'b011: begin
            if (c[11:7] == 5'd2)                                                           // c.addi16sp
              instr_o = {{3{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0, 5'd2, 3'b000, 5'd2, OP_IMM};
            else                                                                           // c.lui
              instr_o = {{15{c[12]}}, c[6:2], c[11:7], OP_LUI};
            if ({c[12], c[6:2]} == 6'd0) illegal_o = 1'b1;
          end
          3'b100: begin
            unique case (c[11:10])
              2'b00: instr_o = {7'b0000000, c[6:2], rs1p, 3'b101, rs1p, OP_IMM};           // c.srli
              2'b01: instr_o = {7'b0100000, c[6:2], rs1p, 3'b101, rs1p, OP_IMM};           // c.srai
              2'b10: instr_o = {{7{c[12]}}, c[6:2], rs1p, 3'b111, rs1p, OP_IMM};           // c.andi
              default: begin
                unique case ({c[12], c[6:5]})
                  3'b000: instr_o = {7'b0100000, rs2p, rs1p, 3'b000, rs1p, OP_OP};         // c.sub
                  3'b001: instr_o = {7'b0000000, rs2p, rs1p, 3'b100, rs1p, OP_OP};         // c.xor
                  3'b010: instr_o = {7'b0000000, rs2p, rs1p, 3'b110, rs1p, OP_OP};         // c.or
                  3'b011: instr_o = {7'b0000000, rs2p, rs1p, 3'b111, rs1p, OP_OP};         // c.and
                  default: illegal_o = 1'b1;
                endcase
              end
            endcase
            if (c[11:10] != 2'b10 && c[12]) illegal_o = 1'b1;   // RV32: shamt[5] must be 0
          end
          3'b110, 3'b111:                                                                  // c.beqz / c.bnez
            instr_o = {bimm[12], bimm[10:5], 5'd0, rs1p, 2'b00, c[13], bimm[4:1], bimm[11], OP_BR};
          default: illegal_o = 1'b1;
        endcase
      end
      2'b10: begin
        unique case (c[15:13])
          3'b000: begin                                                                    // c.slli
            instr_o = {7'b0, c[6:2], c[11:7], 3'b001, c[11:7], OP_IMM};
            if (c[12]) illegal_o = 1'b1;
          end
          3'b010: begin                                                                    // c.lwsp
            instr_o = {4'b0, c[3:2], c[12], c[6:4], 2'b00, 5'd2, 3'b010, c[11:7], OP_LOAD};
            if (c[11:7] == 5'd0) illegal_o = 1'b1;
          end
          3'b100: begin
            if (!c[12]) begin
              if (c[6:2] == 5'd0) begin                                                    // c.jr
                instr_o = {12'd0, c[11:7], 3'b000, 5'd0, OP_JALR};
                if (c[11:7] == 5'd0) illegal_o = 1'b1;
              end else                                                                     // c.mv
                instr_o = {7'b0, c[6:2], 5'd0, 3'b000, c[11:7], OP_OP};
            end else begin
              if (c[6:2] == 5'd0) begin
                if (c[11:7] == 5'd0) instr_o = 32'h0010_0073;                              // c.ebreak
                else instr_o = {12'd0, c[11:7], 3'b000, 5'd1, OP_JALR};                    // c.jalr
              end else                                                                     // c.add
                instr_o = {7'b0, c[6:2], c[11:7], 3'b000, c[11:7], OP_OP};
            end
          end
          3'b110: instr_o = {4'b0, c[8:7], c[12], c[6:2], 5'd2, 3'b010, c[11:9], 2'b00, OP_STORE}; // c.swsp
          default: illegal_o = 1'b1;
        endcase
      end
      default: ;
    endcase
  end

endmodule
