// tb_prog_pkg: instruction encoders and the test program shared by the core and cluster
// testbenches.
//
// The program is a small DSP kernel followed by single checks of the extensions:
//   - an 8b dot product of two 16-word vectors in a hardware loop whose body is two
//     post-increment loads and one pv.sdotsp.b;
//   - a misaligned word load followed directly by its use (load-use stall);
//   - p.clip, p.addRN, p.mulsRN, div, pv.shuffle.b with the mask 0x8D1;
//   - one compressed instruction (so later 32b instructions straddle fetch lines) and a
//     second one; a counted branch loop; a post-increment store;
//   - a store of mhartid to the peripheral end-of-computation address, then a jump to
//     itself.
// Results go to RES_BASE + 256 * mhartid, one word per check (see the word list in
// expected()). The encodings are those of riscv_pkg.
package tb_prog_pkg;
  import riscv_pkg::*;

  localparam logic [31:0] BOOT     = 32'h1C00_0000;
  localparam logic [31:0] VEC_A    = 32'h1000_0000;
  localparam logic [31:0] VEC_B    = 32'h1000_0100;
  localparam logic [31:0] RES_BASE = 32'h1000_8000;
  localparam logic [31:0] EOC_ADDR = 32'h1A10_0000;
  localparam int          N_WORDS  = 16;
  localparam int          N_RES    = 12;

  function automatic logic [31:0] r_t(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                      logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_t(logic [11:0] imm, logic [4:0] rs1, logic [2:0] f3,
                                      logic [4:0] rd, logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] s_t(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                      logic [2:0] f3, logic [6:0] opc);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], opc};
  endfunction
  function automatic logic [31:0] b_t(logic [12:0] imm, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    return {imm[12], imm[10:5], rs2, rs1, f3, imm[4:1], imm[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] lui(logic [4:0] rd, logic [19:0] imm);
    return {imm, rd, OPC_LUI};
  endfunction
  function automatic logic [31:0] addi(logic [4:0] rd, logic [4:0] rs1, logic [11:0] imm);
    return i_t(imm, rs1, 3'd0, rd, OPC_OPIMM);
  endfunction

  // program as a stream of halfwords
  typedef struct {
    logic [15:0] h [256];
    int          n;
  } prog_t;

  function automatic void put32(ref prog_t p, input logic [31:0] w);
    p.h[p.n] = w[15:0]; p.h[p.n+1] = w[31:16]; p.n += 2;
  endfunction
  function automatic void put16(ref prog_t p, input logic [15:0] w);
    p.h[p.n] = w; p.n += 1;
  endfunction

  function automatic void build(ref prog_t p);
    p.n = 0;
    put32(p, i_t(CSR_MHARTID, 5'd0, 3'b010, 5'd10, OPC_SYSTEM));  // csrr x10, mhartid
    put32(p, i_t(12'd8, 5'd10, 3'b001, 5'd11, OPC_OPIMM));       // slli x11, x10, 8
    put32(p, lui(5'd1, VEC_A[31:12]));                           // x1 = A
    put32(p, addi(5'd2, 5'd1, 12'h100));                          // x2 = B
    put32(p, addi(5'd3, 5'd0, 12'd0));                            // x3 = 0
    put32(p, addi(5'd4, 5'd0, 12'(N_WORDS)));                     // x4 = N
    put32(p, lui(5'd12, RES_BASE[31:12]));
    put32(p, r_t(7'd0, 5'd11, 5'd12, 3'd0, 5'd12, OPC_OP));       // x12 += hart*256
    // lp.setup L0, x4, body end = pc + 12
    put32(p, {12'd6, 5'd4, 3'd4, 5'd0, OPC_HWLOOP});
    put32(p, i_t(12'd4, 5'd1, 3'b010, 5'd5, OPC_LOAD_PI));        // p.lw x5, 4(x1!)
    put32(p, i_t(12'd4, 5'd2, 3'b010, 5'd6, OPC_LOAD_PI));        // p.lw x6, 4(x2!)
    put32(p, {VOP_SDOTSP, 1'b0, 5'd6, 5'd5, 3'b100, 5'd3, OPC_VECOP}); // pv.sdotsp.b x3, x5, x6
    put32(p, s_t(12'd0, 5'd3, 5'd12, 3'b010, OPC_STORE));         // [0] dot product
    put32(p, lui(5'd14, VEC_A[31:12]));
    put32(p, i_t(12'h101, 5'd14, 3'b010, 5'd7, OPC_LOAD));        // lw x7, 0x101(x14): misaligned
    put32(p, r_t(7'd0, 5'd7, 5'd7, 3'd0, 5'd8, OPC_OP));          // add x8, x7, x7: load use
    put32(p, s_t(12'd4, 5'd7, 5'd12, 3'b010, OPC_STORE));         // [1]
    put32(p, s_t(12'd8, 5'd8, 5'd12, 3'b010, OPC_STORE));         // [2]
    put32(p, {7'd0, 5'd8, 5'd3, 3'd5, 5'd9, OPC_PULP});           // p.clip x9, x3, 8
    put32(p, s_t(12'd12, 5'd9, 5'd12, 3'b010, OPC_STORE));        // [3]
    put32(p, {2'b10, 5'd3, 5'd7, 5'd3, 3'd0, 5'd15, OPC_PULP});   // p.addRN x15, x3, x7, 3
    put32(p, s_t(12'd16, 5'd15, 5'd12, 3'b010, OPC_STORE));       // [4]
    put32(p, {2'b10, 5'd4, 5'd6, 5'd5, 3'd1, 5'd16, OPC_PULP});   // p.mulsRN x16, x5, x6, 4
    put32(p, s_t(12'd20, 5'd16, 5'd12, 3'b010, OPC_STORE));       // [5]
    put32(p, r_t(7'd1, 5'd4, 5'd3, 3'd4, 5'd17, OPC_OP));         // div x17, x3, x4
    put32(p, s_t(12'd24, 5'd17, 5'd12, 3'b010, OPC_STORE));       // [6]
    put32(p, lui(5'd19, 20'd1));
    put32(p, addi(5'd19, 5'd19, 12'(2257 - 4096)));               // x19 = 0x8D1
    put32(p, {VOP_SHUFFLE, 1'b0, 5'd19, 5'd5, 3'b100, 5'd18, OPC_VECOP}); // pv.shuffle.b x18, x5, x19
    put32(p, s_t(12'd28, 5'd18, 5'd12, 3'b010, OPC_STORE));       // [7]
    put16(p, {3'b000, 1'b0, 5'd3, 5'd1, 2'b01});                  // c.addi x3, 1
    put32(p, addi(5'd21, 5'd0, 12'd5));                           // x21 = 5
    put32(p, addi(5'd22, 5'd0, 12'd0));                           // x22 = 0
    put32(p, addi(5'd22, 5'd22, 12'd3));                          // loop: x22 += 3
    put32(p, addi(5'd21, 5'd21, 12'hFFF));                        //       x21 -= 1
    put32(p, b_t(13'h1FF8, 5'd0, 5'd21, 3'b001));                 //       bne x21, x0, loop
    put16(p, {3'b100, 1'b0, 5'd20, 5'd3, 2'b10});                 // c.mv x20, x3
    put32(p, s_t(12'd32, 5'd20, 5'd12, 3'b010, OPC_STORE));       // [8] dot + 1
    put32(p, s_t(12'd36, 5'd22, 5'd12, 3'b010, OPC_STORE));       // [9] 15
    put32(p, addi(5'd12, 5'd12, 12'd40));
    put32(p, s_t(12'd4, 5'd22, 5'd12, 3'b010, OPC_STORE_PI));     // [10] p.sw x22, 4(x12!)
    put32(p, s_t(12'd0, 5'd4, 5'd12, 3'b010, OPC_STORE));         // [11] x4 at the new x12
    put32(p, lui(5'd23, EOC_ADDR[31:12]));
    put32(p, s_t(12'd0, 5'd10, 5'd23, 3'b010, OPC_STORE));        // end of computation
    put32(p, 32'h0000_006F);                                      // j .
  endfunction

  // expected result words for vectors a and b (16 words each)
  function automatic void expected(input logic [31:0] a [N_WORDS], input logic [31:0] b [N_WORDS],
                                   output logic [31:0] e [N_RES]);
    logic [31:0] dot, mis, shuf;
    longint p16;
    dot = 0;
    for (int w = 0; w < N_WORDS; w++)
      for (int i = 0; i < 4; i++)
        dot += 32'($signed(a[w][8*i +: 8]) * $signed(b[w][8*i +: 8]));
    mis = {b[1][7:0], b[0][31:8]};
    e[0] = dot;
    e[1] = mis;
    e[2] = mis + mis;
    e[3] = ($signed(dot) > 127) ? 32'd127 : ($signed(dot) < -128) ? 32'hFFFF_FF80 : dot;
    e[4] = 32'($signed(dot + mis + 32'd4) >>> 3);
    p16  = longint'($signed(a[N_WORDS-1][15:0])) * longint'($signed(b[N_WORDS-1][15:0])) + 8;
    e[5] = 32'(p16 >>> 4);
    e[6] = 32'($signed(dot) / 16);
    shuf = {a[N_WORDS-1][7:0], a[N_WORDS-1][31:24], a[N_WORDS-1][23:16], a[N_WORDS-1][15:8]};
    e[7] = shuf;
    e[8] = dot + 1;
    e[9] = 32'd15;
    e[10] = 32'd15;
    e[11] = 32'(N_WORDS);
  endfunction
endpackage
