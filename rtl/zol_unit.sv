// zol_unit: zero-overhead hardware loop registers and loop-back control.
//
// Holds the three loop registers ZC (remaining iteration count), ZS (address
// of the first body instruction) and ZE (address of the last body
// instruction). Execute side: when a loop instruction is in the execute
// stage (op != ZOL_NONE) it computes and writes them:
//   dlp    ZC = rs1,             ZS = pc + 4,          ZE = pc + imm12
//   dlpi   ZC = const5,          ZS = pc + 4,          ZE = pc + imm12
//   zlp    ZC = rs1,             ZS = pc + 4*imm1,     ZE = pc + 4*imm2
//   set.zc ZC = rs1
//   set.zs ZS = pc + 4*imm10     set.ze ZE = pc + 4*imm10
// with imm12 = instr[31:20], const5 = instr[19:15], imm1 = {instr[14:12],
// instr[11:7]}, imm2 = imm10 = instr[31:22], all unsigned. Fetch side: each
// cycle the fetch stage presents the address it fetches; if that address is
// ZE and at least one iteration remains, the instruction is tagged as a loop
// end (is_end) and, unless it is the last iteration, the next fetch address
// becomes ZS (loop_back) instead of pc+4, so no branch instruction and no
// bubble is spent per iteration. ZC decrements when a tagged instruction
// leaves the execute stage (end_commit); the fetch test subtracts the
// tagged instruction still in decode (id_end_pending) so that it sees the
// count the loop will have, and uses the values the registers take at the
// coming clock edge. A loop with ZC = 0 is inactive.
// The register names, the opcodes and field positions follow the paper; the
// exact semantics of each instruction, the address units, the count
// convention and the single (non-nested) loop level are this design's
// choices.
module zol_unit
  import marvel_pkg::*;
#(
  parameter int unsigned XLEN = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  // execute stage
  input  zol_op_e         op,
  input  logic [31:0]     instr,
  input  logic [XLEN-1:0] pc,
  input  logic [XLEN-1:0] rs1_val,
  input  logic            end_commit,
  // fetch stage
  input  logic            id_end_pending,
  input  logic [XLEN-1:0] fetch_pc,
  output logic            is_end,
  output logic            loop_back,
  output logic [XLEN-1:0] loop_target,
  // register view
  output logic [XLEN-1:0] zc,
  output logic [XLEN-1:0] zs,
  output logic [XLEN-1:0] ze
);
  logic            wr_zc, wr_zs, wr_ze;
  logic [XLEN-1:0] zc_val, zs_val, ze_val;
  logic [XLEN-1:0] zc_n, zs_n, ze_n, zc_spec;
  logic [11:0]     imm12;
  logic [9:0]      imm10;
  logic [7:0]      imm1;

  always_comb begin
    imm12 = instr[31:20];
    imm10 = instr[31:22];
    imm1  = {instr[14:12], instr[11:7]};
    wr_zc = 1'b0; wr_zs = 1'b0; wr_ze = 1'b0;
    zc_val = rs1_val;
    zs_val = pc + XLEN'(4);
    ze_val = pc + XLEN'(imm12);
    unique case (op)
      ZOL_DLP:   begin wr_zc = 1'b1; wr_zs = 1'b1; wr_ze = 1'b1; end
      ZOL_DLPI:  begin wr_zc = 1'b1; wr_zs = 1'b1; wr_ze = 1'b1;
                       zc_val = XLEN'(instr[19:15]); end
      ZOL_ZLP:   begin wr_zc = 1'b1; wr_zs = 1'b1; wr_ze = 1'b1;
                       zs_val = pc + XLEN'({imm1, 2'b00});
                       ze_val = pc + XLEN'({imm10, 2'b00}); end
      ZOL_SETZC: wr_zc = 1'b1;
      ZOL_SETZS: begin wr_zs = 1'b1; zs_val = pc + XLEN'({imm10, 2'b00}); end
      ZOL_SETZE: begin wr_ze = 1'b1; ze_val = pc + XLEN'({imm10, 2'b00}); end
      default: ;
    endcase
  end

  // values after the coming edge
  always_comb begin
    zs_n = wr_zs ? zs_val : zs;
    ze_n = wr_ze ? ze_val : ze;
    if (wr_zc)                       zc_n = zc_val;
    else if (end_commit && zc != '0) zc_n = zc - 1'b1;
    else                             zc_n = zc;
    zc_spec = (id_end_pending && zc_n != '0) ? zc_n - 1'b1 : zc_n;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      zc <= '0; zs <= '0; ze <= '0;
    end else begin
      zc <= zc_n; zs <= zs_n; ze <= ze_n;
    end
  end

  assign is_end      = (zc_spec != '0) && (fetch_pc == ze_n);
  assign loop_back   = is_end && (zc_spec != XLEN'(1));
  assign loop_target = zs_n;
endmodule
