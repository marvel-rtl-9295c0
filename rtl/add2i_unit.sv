// add2i_unit: datapath of the custom "add2i" instruction.
//
// Two independent adders update two registers with two unsigned immediates in
// one execute cycle: rs1_new = rs1_val + i1 and rs2_new = rs2_val + i2. The
// immediates are cut from the instruction word exactly as the encoding
// places them: i1 (5 bits, 0..31) = {instr[21:20], instr[14:12]} and
// i2 (10 bits, 0..1023) = instr[31:22]; both are zero-extended. The register
// numbers (rs1 in instr[11:7], rs2 in instr[19:15]) are handled by the
// decoder. Everything here follows the paper's encoding and datapath figure.
module add2i_unit
  import marvel_pkg::*;
#(
  parameter int unsigned XLEN = 32
) (
  input  logic [31:0]     instr,
  input  logic [XLEN-1:0] rs1_val,
  input  logic [XLEN-1:0] rs2_val,
  output logic [I1_W-1:0] i1,
  output logic [I2_W-1:0] i2,
  output logic [XLEN-1:0] rs1_new,
  output logic [XLEN-1:0] rs2_new
);
  assign i1 = {instr[21:20], instr[14:12]};
  assign i2 = instr[31:22];
  assign rs1_new = rs1_val + XLEN'(i1);
  assign rs2_new = rs2_val + XLEN'(i2);
endmodule
