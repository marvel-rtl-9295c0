// alu: RV32I integer ALU of the execute stage.
//
// Purely combinational: y = a <op> b for the ten RV32I register/immediate
// operations plus a pass-through of b (used by lui). Shift amounts are
// b[4:0]. The base core is not described beyond its ISA (RV32IM), so this is
// a plain implementation of the RISC-V specification.
module alu
  import marvel_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  alu_op_e       op,
  input  logic [W-1:0]  a,
  input  logic [W-1:0]  b,
  output logic [W-1:0]  y
);
  logic [4:0] sh;
  assign sh = b[4:0];

  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << sh;
      ALU_SLT:   y = W'($signed(a) < $signed(b));
      ALU_SLTU:  y = W'(a < b);
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> sh;
      ALU_SRA:   y = W'($signed(a) >>> sh);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      default:   y = a + b;
    endcase
  end
endmodule
