// mac_unit: datapath of the custom "mac" instruction.
//
// Computes y = acc + a*b on 32-bit operands, keeping the low 32 bits, in one
// combinational step of the execute stage: one multiplier feeding one adder.
// In the core acc is x20 and a, b are x21 and x22; the registers are fixed
// by the instruction, which carries no register fields. The fixed registers
// and the single-cycle multiply-then-add structure follow the paper; taking
// the low 32 bits of the product (as the mul instruction it replaces does)
// is stated there only as "a 32-bit multiplication".
module mac_unit #(
  parameter int unsigned XLEN = 32
) (
  input  logic [XLEN-1:0] acc,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic [XLEN-1:0] y
);
  logic [XLEN-1:0] prod;
  assign prod = a * b;
  assign y    = acc + prod;
endmodule
