// decoder: instruction decoder of the decode stage, extended with the custom
// instructions.
//
// Combinational. Turns a 32-bit instruction into the ctrl_t struct: register
// numbers, immediate, ALU operation and operand selects, and one flag per
// instruction class. Besides RV32IM it recognises:
//   mac      opcode 1011011 (custom-2), funct7 0100000, funct3 000;
//            reads x21, x22 and x20, writes x20 (fixed registers)
//   add2i    opcode 0101011 (custom-1); rs1 = instr[11:7], rs2 = instr[19:15]
//   fusedmac opcode 0001011 (custom-0); same fields as add2i
//   zol      opcode 1110111 with funct3 000 dlp, 001 dlpi, 010 set.zc,
//            011 set.zs (rd = 1) / set.ze (rd = 2); opcode 1011111 zlp
// ecall/ebreak (SYSTEM, funct3 0) and SWBRK (opcode 1111011) raise is_halt.
// CSR instructions, FENCE and unknown opcodes decode as no-ops. The opcode
// map and field positions follow the paper; treating system instructions as
// a halt and unknown encodings as no-ops are this design's choices.
module decoder
  import marvel_pkg::*;
(
  input  logic [31:0] instr,
  output ctrl_t       ctrl
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opc = instr[6:0];
    f3  = instr[14:12];
    f7  = instr[31:25];
    imm_i = {{20{instr[31]}}, instr[31:20]};
    imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u = {instr[31:12], 12'b0};
    imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    ctrl = '0;
    ctrl.rs1    = instr[19:15];
    ctrl.rs2    = instr[24:20];
    ctrl.rd     = instr[11:7];
    ctrl.funct3 = f3;
    ctrl.a_sel  = ASEL_RS1;
    ctrl.alu_op = ALU_ADD;
    ctrl.zol_op = ZOL_NONE;

    unique case (opc)
      OPC_LUI: begin
        ctrl.valid_op = 1'b1; ctrl.rd_we = 1'b1; ctrl.imm = imm_u;
        ctrl.b_imm = 1'b1; ctrl.alu_op = ALU_PASSB;
      end
      OPC_AUIPC: begin
        ctrl.valid_op = 1'b1; ctrl.rd_we = 1'b1; ctrl.imm = imm_u;
        ctrl.b_imm = 1'b1; ctrl.a_sel = ASEL_PC;
      end
      OPC_JAL: begin
        ctrl.valid_op = 1'b1; ctrl.rd_we = 1'b1; ctrl.imm = imm_j; ctrl.is_jal = 1'b1;
      end
      OPC_JALR: begin
        ctrl.valid_op = 1'b1; ctrl.rd_we = 1'b1; ctrl.imm = imm_i; ctrl.is_jalr = 1'b1;
        ctrl.b_imm = 1'b1;
      end
      OPC_BRANCH: begin
        ctrl.valid_op = 1'b1; ctrl.imm = imm_b; ctrl.is_branch = 1'b1;
      end
      OPC_LOAD: begin
        ctrl.valid_op = 1'b1; ctrl.rd_we = 1'b1; ctrl.imm = imm_i; ctrl.is_load = 1'b1;
        ctrl.b_imm = 1'b1;
      end
      OPC_STORE: begin
        ctrl.valid_op = 1'b1; ctrl.imm = imm_s; ctrl.is_store = 1'b1; ctrl.b_imm = 1'b1;
      end
      OPC_OPIMM: begin
        ctrl.valid_op = 1'b1; ctrl.rd_we = 1'b1; ctrl.imm = imm_i; ctrl.b_imm = 1'b1;
        unique case (f3)
          3'b000: ctrl.alu_op = ALU_ADD;
          3'b001: ctrl.alu_op = ALU_SLL;
          3'b010: ctrl.alu_op = ALU_SLT;
          3'b011: ctrl.alu_op = ALU_SLTU;
          3'b100: ctrl.alu_op = ALU_XOR;
          3'b101: ctrl.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
          3'b110: ctrl.alu_op = ALU_OR;
          default: ctrl.alu_op = ALU_AND;
        endcase
      end
      OPC_OP: begin
        ctrl.valid_op = 1'b1; ctrl.rd_we = 1'b1;
        if (f7 == 7'b0000001) begin
          ctrl.is_mul = ~f3[2];
          ctrl.is_div = f3[2];
        end else begin
          unique case (f3)
            3'b000: ctrl.alu_op = instr[30] ? ALU_SUB : ALU_ADD;
            3'b001: ctrl.alu_op = ALU_SLL;
            3'b010: ctrl.alu_op = ALU_SLT;
            3'b011: ctrl.alu_op = ALU_SLTU;
            3'b100: ctrl.alu_op = ALU_XOR;
            3'b101: ctrl.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
            3'b110: ctrl.alu_op = ALU_OR;
            default: ctrl.alu_op = ALU_AND;
          endcase
        end
      end
      OPC_MAC: begin
        if (f7 == MAC_FUNCT7 && f3 == 3'b000) begin
          ctrl.valid_op = 1'b1; ctrl.is_mac = 1'b1;
          ctrl.rs1 = MAC_RS1; ctrl.rs2 = MAC_RS2; ctrl.rd = MAC_RD;
        end
      end
      OPC_ADD2I: begin
        ctrl.valid_op = 1'b1; ctrl.is_add2i = 1'b1;
        ctrl.rs1 = instr[11:7]; ctrl.rs2 = instr[19:15]; ctrl.rd = instr[11:7];
      end
      OPC_FUSEDMAC: begin
        ctrl.valid_op = 1'b1; ctrl.is_fusedmac = 1'b1;
        ctrl.rs1 = instr[11:7]; ctrl.rs2 = instr[19:15]; ctrl.rd = instr[11:7];
      end
      OPC_ZOL: begin
        unique case (f3)
          ZF3_DLP:   begin ctrl.valid_op = 1'b1; ctrl.zol_op = ZOL_DLP; end
          ZF3_DLPI:  begin ctrl.valid_op = 1'b1; ctrl.zol_op = ZOL_DLPI; end
          ZF3_SETZC: begin ctrl.valid_op = 1'b1; ctrl.zol_op = ZOL_SETZC; end
          ZF3_SETR: begin
            if (instr[11:7] == ZREG_ZS) begin
              ctrl.valid_op = 1'b1; ctrl.zol_op = ZOL_SETZS;
            end else if (instr[11:7] == ZREG_ZE) begin
              ctrl.valid_op = 1'b1; ctrl.zol_op = ZOL_SETZE;
            end
          end
          default: ;
        endcase
      end
      OPC_ZLP: begin
        ctrl.valid_op = 1'b1; ctrl.zol_op = ZOL_ZLP;
      end
      OPC_SYSTEM: begin
        ctrl.valid_op = 1'b1;
        ctrl.is_halt = (f3 == 3'b000);
      end
      OPC_SWBRK: begin
        ctrl.valid_op = 1'b1; ctrl.is_halt = 1'b1;
      end
      OPC_MISCMEM: ctrl.valid_op = 1'b1;
      default: ;
    endcase
  end
endmodule
