// marvel_pkg: shared constants and types of the extended RV32IM core.
//
// Holds the major opcodes of the base ISA and of the four custom extension
// groups (mac, add2i, fusedmac, zero-overhead loops), the fixed registers of
// the mac datapath, the immediate widths of add2i/fusedmac, the ALU and
// execute-unit selectors and the decoded-control struct passed from the
// decode to the execute stage. Opcode values follow the custom opcode map of
// the design (custom-0 = fusedmac, custom-1 = add2i, custom-2 = mac,
// 1110111 and 1011111 = zero-overhead loops). The ZOL register numbering used
// in the rd field (ZC=0, ZS=1, ZE=2) is this implementation's own choice.
package marvel_pkg;


  // Major opcodes (instr[6:0])
  localparam logic [6:0] OPC_LOAD     = 7'b0000011;
  localparam logic [6:0] OPC_FUSEDMAC = 7'b0001011;  // custom-0
  localparam logic [6:0] OPC_MISCMEM  = 7'b0001111;
  localparam logic [6:0] OPC_OPIMM    = 7'b0010011;
  localparam logic [6:0] OPC_AUIPC    = 7'b0010111;
  localparam logic [6:0] OPC_STORE    = 7'b0100011;
  localparam logic [6:0] OPC_ADD2I    = 7'b0101011;  // custom-1
  localparam logic [6:0] OPC_OP       = 7'b0110011;
  localparam logic [6:0] OPC_LUI      = 7'b0110111;
  localparam logic [6:0] OPC_MAC      = 7'b1011011;  // custom-2
  localparam logic [6:0] OPC_ZLP      = 7'b1011111;  // zol (2/2)
  localparam logic [6:0] OPC_BRANCH   = 7'b1100011;
  localparam logic [6:0] OPC_JALR     = 7'b1100111;
  localparam logic [6:0] OPC_JAL      = 7'b1101111;
  localparam logic [6:0] OPC_SYSTEM   = 7'b1110011;
  localparam logic [6:0] OPC_ZOL      = 7'b1110111;  // zol (1/2)
  localparam logic [6:0] OPC_SWBRK    = 7'b1111011;

  // mac: fixed funct7 and registers
  localparam logic [6:0] MAC_FUNCT7 = 7'b0100000;
  localparam logic [4:0] MAC_RD  = 5'd20;
  localparam logic [4:0] MAC_RS1 = 5'd21;
  localparam logic [4:0] MAC_RS2 = 5'd22;

  // add2i / fusedmac immediate widths
  localparam int unsigned I1_W = 5;
  localparam int unsigned I2_W = 10;

  // zol funct3 values (opcode 1110111)
  localparam logic [2:0] ZF3_DLP  = 3'b000;
  localparam logic [2:0] ZF3_DLPI = 3'b001;
  localparam logic [2:0] ZF3_SETZC = 3'b010;
  localparam logic [2:0] ZF3_SETR = 3'b011;
  // ZOL register numbers in the rd field
  localparam logic [4:0] ZREG_ZC = 5'd0;
  localparam logic [4:0] ZREG_ZS = 5'd1;
  localparam logic [4:0] ZREG_ZE = 5'd2;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU,
    ALU_XOR, ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {
    ZOL_NONE, ZOL_DLP, ZOL_DLPI, ZOL_ZLP, ZOL_SETZC, ZOL_SETZS, ZOL_SETZE
  } zol_op_e;

  typedef enum logic [1:0] { ASEL_RS1, ASEL_PC, ASEL_ZERO } asel_e;

  typedef struct packed {
    logic        valid_op;   // recognised instruction
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        rd_we;      // writes rd with the main result
    logic [31:0] imm;
    asel_e       a_sel;
    logic        b_imm;      // ALU operand b is imm (else rs2)
    alu_op_e     alu_op;
    logic        is_branch;
    logic        is_jal;
    logic        is_jalr;
    logic        is_load;
    logic        is_store;
    logic [2:0]  funct3;
    logic        is_mul;     // RV32M multiply group
    logic        is_div;     // RV32M divide/remainder group
    logic        is_mac;
    logic        is_add2i;
    logic        is_fusedmac;
    zol_op_e     zol_op;
    logic        is_halt;
  } ctrl_t;

endpackage
