// fusedmac_unit: datapath of the custom "fusedmac" instruction.
//
// Combines one mac_unit and one add2i_unit working side by side in the same
// execute cycle: x20_new = x20 + x21*x22, rs1_new = rs1 + i1,
// rs2_new = rs2 + i2. All inputs are the values read in the decode stage, so
// the multiply uses x21/x22 as they were before this instruction even if rs1
// or rs2 names one of them. Reusing the two separate units, rather than a
// third copy of the hardware, follows the paper ("this instruction utilizes
// two functional units (mac and add2i)").
module fusedmac_unit
  import marvel_pkg::*;
#(
  parameter int unsigned XLEN = 32
) (
  input  logic [31:0]     instr,
  input  logic [XLEN-1:0] rs1_val,
  input  logic [XLEN-1:0] rs2_val,
  input  logic [XLEN-1:0] x20,
  input  logic [XLEN-1:0] x21,
  input  logic [XLEN-1:0] x22,
  output logic [XLEN-1:0] rs1_new,
  output logic [XLEN-1:0] rs2_new,
  output logic [XLEN-1:0] x20_new
);
  logic [I1_W-1:0] i1;
  logic [I2_W-1:0] i2;

  mac_unit #(.XLEN(XLEN)) u_mac (
    .acc(x20), .a(x21), .b(x22), .y(x20_new)
  );

  add2i_unit #(.XLEN(XLEN)) u_add2i (
    .instr(instr), .rs1_val(rs1_val), .rs2_val(rs2_val),
    .i1(i1), .i2(i2), .rs1_new(rs1_new), .rs2_new(rs2_new)
  );
endmodule
