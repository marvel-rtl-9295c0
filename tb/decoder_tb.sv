// decoder_tb: decodes encoded instructions of every class and checks the
// control fields, including the custom opcodes and the fixed mac registers.
module decoder_tb;
  import marvel_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr; ctrl_t c;
  int checks = 0, failures = 0;
  decoder dut (.instr, .ctrl(c));
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; if (failures < 15) $display("%s got %h exp %h", s, g, e); end
  endtask
  initial begin
    logic [4:0] r1, r2, rd; int im;
    for (int i = 0; i < 200; i++) begin
      r1 = 5'($urandom); r2 = 5'($urandom); rd = 5'($urandom); im = $urandom_range(0, 4095) - 2048;
      instr = addi(rd, r1, im); #1;
      chk(c.rd, rd, "addi rd"); chk(c.rs1, r1, "addi rs1"); chk(c.imm, im, "addi imm");
      chk(c.rd_we, 1, "addi we"); chk(c.b_imm, 1, "addi bimm"); chk(c.alu_op, ALU_ADD, "addi op");
      instr = sub(rd, r1, r2); #1;
      chk(c.alu_op, ALU_SUB, "sub op"); chk(c.rs2, r2, "sub rs2"); chk(c.b_imm, 0, "sub bimm");
      instr = mul(rd, r1, r2); #1; chk(c.is_mul, 1, "mul"); chk(c.is_div, 0, "mul not div");
      instr = div(rd, r1, r2); #1; chk(c.is_div, 1, "div");
      instr = lw(rd, r1, im); #1; chk(c.is_load, 1, "lw"); chk(c.imm, im, "lw imm");
      instr = sw(r2, r1, im); #1; chk(c.is_store, 1, "sw"); chk(c.imm, im, "sw imm"); chk(c.rd_we, 0, "sw we");
      im = 2 * ($urandom_range(0, 4095) - 2048);
      instr = bne(r1, r2, im); #1; chk(c.is_branch, 1, "bne"); chk(c.imm, im, "bne imm"); chk(c.funct3, 1, "bne f3");
      im = 2 * ($urandom_range(0, 1048575) - 524288);
      instr = jal(rd, im); #1; chk(c.is_jal, 1, "jal"); chk(c.imm, im, "jal imm");
      instr = lui(rd, 20'($urandom)); #1; chk(c.imm, {instr[31:12], 12'b0}, "lui imm"); chk(c.alu_op, ALU_PASSB, "lui op");
      // custom
      instr = mac(); #1;
      chk(c.is_mac, 1, "mac"); chk(c.rd, 20, "mac rd"); chk(c.rs1, 21, "mac rs1"); chk(c.rs2, 22, "mac rs2");
      chk(c.rd_we, 0, "mac main we");
      instr = add2i(r1, r2, 5'($urandom), 10'($urandom)); #1;
      chk(c.is_add2i, 1, "add2i"); chk(c.rs1, r1, "add2i rs1"); chk(c.rs2, r2, "add2i rs2");
      instr = fusedmac(r1, r2, 5'($urandom), 10'($urandom)); #1;
      chk(c.is_fusedmac, 1, "fusedmac"); chk(c.rs1, r1, "fm rs1"); chk(c.rs2, r2, "fm rs2");
      chk(c.is_add2i, 0, "fm not add2i");
      instr = dlp(r1, 12'($urandom)); #1; chk(c.zol_op, ZOL_DLP, "dlp"); chk(c.rs1, r1, "dlp rs1");
      instr = dlpi(r1, 12'($urandom)); #1; chk(c.zol_op, ZOL_DLPI, "dlpi");
      instr = zlp(r1, 8'($urandom), 10'($urandom)); #1; chk(c.zol_op, ZOL_ZLP, "zlp"); chk(c.rs1, r1, "zlp rs1");
      instr = setzc(r1); #1; chk(c.zol_op, ZOL_SETZC, "set.zc");
      instr = setzs(10'($urandom)); #1; chk(c.zol_op, ZOL_SETZS, "set.zs");
      instr = setze(10'($urandom)); #1; chk(c.zol_op, ZOL_SETZE, "set.ze");
      instr = ebreak(); #1; chk(c.is_halt, 1, "ebreak");
      instr = 32'h0000_007B; #1; chk(c.is_halt, 1, "swbrk");
      // mac with a wrong funct7 is not a mac
      instr = mac() ^ 32'h8000_0000; #1; chk(c.is_mac, 0, "bad mac");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
