// rv_asm_pkg: instruction encoders used by the test benches to build
// programs for the extended core (RV32IM plus mac, add2i, fusedmac and the
// zero-overhead loop instructions), written independently of the RTL
// decoder from the instruction formats.
package rv_asm_pkg;
  function automatic logic [31:0] r_t(input logic [6:0] f7, input logic [4:0] rs2, rs1,
                                      input logic [2:0] f3, input logic [4:0] rd, input logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_t(input int imm, input logic [4:0] rs1, input logic [2:0] f3,
                                      input logic [4:0] rd, input logic [6:0] opc);
    logic [11:0] im; im = 12'(imm);
    return {im, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] s_t(input int imm, input logic [4:0] rs2, rs1, input logic [2:0] f3);
    logic [11:0] im; im = 12'(imm);
    return {im[11:5], rs2, rs1, f3, im[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(input int off, input logic [4:0] rs2, rs1, input logic [2:0] f3);
    logic [12:0] o; o = 13'(off);
    return {o[12], o[10:5], rs2, rs1, f3, o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] addi(input logic [4:0] rd, rs1, input int imm);
    return i_t(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] slli(input logic [4:0] rd, rs1, input int sh);
    return i_t(sh, rs1, 3'b001, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] lui(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0110111};
  endfunction
  function automatic logic [31:0] auipc(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0010111};
  endfunction
  function automatic logic [31:0] add(input logic [4:0] rd, rs1, rs2);
    return r_t(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] sub(input logic [4:0] rd, rs1, rs2);
    return r_t(7'b0100000, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] mul(input logic [4:0] rd, rs1, rs2);
    return r_t(7'b0000001, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] mulh(input logic [4:0] rd, rs1, rs2);
    return r_t(7'b0000001, rs2, rs1, 3'b001, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] div(input logic [4:0] rd, rs1, rs2);
    return r_t(7'b0000001, rs2, rs1, 3'b100, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] remu(input logic [4:0] rd, rs1, rs2);
    return r_t(7'b0000001, rs2, rs1, 3'b111, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] slt(input logic [4:0] rd, rs1, rs2);
    return r_t(7'b0, rs2, rs1, 3'b010, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] lw(input logic [4:0] rd, rs1, input int imm);
    return i_t(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lb(input logic [4:0] rd, rs1, input int imm);
    return i_t(imm, rs1, 3'b000, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lbu(input logic [4:0] rd, rs1, input int imm);
    return i_t(imm, rs1, 3'b100, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] lh(input logic [4:0] rd, rs1, input int imm);
    return i_t(imm, rs1, 3'b001, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] sw(input logic [4:0] rs2, rs1, input int imm);
    return s_t(imm, rs2, rs1, 3'b010);
  endfunction
  function automatic logic [31:0] sb(input logic [4:0] rs2, rs1, input int imm);
    return s_t(imm, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] sh(input logic [4:0] rs2, rs1, input int imm);
    return s_t(imm, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] beq(input logic [4:0] rs1, rs2, input int off);
    return b_t(off, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] bne(input logic [4:0] rs1, rs2, input int off);
    return b_t(off, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] blt(input logic [4:0] rs1, rs2, input int off);
    return b_t(off, rs2, rs1, 3'b100);
  endfunction
  function automatic logic [31:0] bge(input logic [4:0] rs1, rs2, input int off);
    return b_t(off, rs2, rs1, 3'b101);
  endfunction
  function automatic logic [31:0] jal(input logic [4:0] rd, input int off);
    logic [20:0] o; o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], rd, 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(input logic [4:0] rd, rs1, input int imm);
    return i_t(imm, rs1, 3'b000, rd, 7'b1100111);
  endfunction
  function automatic logic [31:0] ebreak();
    return 32'h0010_0073;
  endfunction
  // ---- custom extensions ----
  // mac: x20 = x20 + x21*x22
  function automatic logic [31:0] mac();
    return {7'b0100000, 5'b0, 5'b0, 3'b000, 5'b0, 7'b1011011};
  endfunction
  // add2i rs1, rs2, i1, i2 : rs1 += i1 (0..31), rs2 += i2 (0..1023)
  function automatic logic [31:0] add2i(input logic [4:0] rs1, rs2, input logic [4:0] i1,
                                        input logic [9:0] i2);
    return {i2, i1[4:3], rs2, i1[2:0], rs1, 7'b0101011};
  endfunction
  function automatic logic [31:0] fusedmac(input logic [4:0] rs1, rs2, input logic [4:0] i1,
                                           input logic [9:0] i2);
    return {i2, i1[4:3], rs2, i1[2:0], rs1, 7'b0001011};
  endfunction
  // dlp rs1, imm12 : loop body pc+4 .. pc+imm12, count rs1
  function automatic logic [31:0] dlp(input logic [4:0] rs1, input logic [11:0] imm);
    return {imm, rs1, 3'b000, 5'b0, 7'b1110111};
  endfunction
  function automatic logic [31:0] dlpi(input logic [4:0] cnt, input logic [11:0] imm);
    return {imm, cnt, 3'b001, 5'b0, 7'b1110111};
  endfunction
  function automatic logic [31:0] setzc(input logic [4:0] rs1);
    return {12'b0, rs1, 3'b010, 5'd0, 7'b1110111};
  endfunction
  function automatic logic [31:0] setzs(input logic [9:0] imm_words);
    return {imm_words, 2'b00, 5'b0, 3'b011, 5'd1, 7'b1110111};
  endfunction
  function automatic logic [31:0] setze(input logic [9:0] imm_words);
    return {imm_words, 2'b00, 5'b0, 3'b011, 5'd2, 7'b1110111};
  endfunction
  // zlp rs1, imm1 (start, words), imm2 (end, words)
  function automatic logic [31:0] zlp(input logic [4:0] rs1, input logic [7:0] imm1,
                                      input logic [9:0] imm2);
    return {imm2, imm1[1:0], rs1, imm1[7:5], imm1[4:0], 7'b1011111};
  endfunction
endpackage
