// add2i_unit_tb: encodes add2i instructions with random immediates and
// checks the decoded immediates and both sums.
module add2i_unit_tb;
  import rv_asm_pkg::*;
  logic [31:0] instr, rs1_val, rs2_val, rs1_new, rs2_new;
  logic [4:0] i1; logic [9:0] i2;
  logic [4:0] ei1; logic [9:0] ei2;
  int checks = 0, failures = 0;
  add2i_unit dut (.instr, .rs1_val, .rs2_val, .i1, .i2, .rs1_new, .rs2_new);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; if (failures < 10) $display("%s got %h exp %h", s, g, e); end
  endtask
  initial begin
    for (int i = 0; i < 2000; i++) begin
      ei1 = 5'($urandom); ei2 = 10'($urandom);
      if (i == 0) begin ei1 = 31; ei2 = 1023; end
      instr = add2i(5'($urandom), 5'($urandom), ei1, ei2);
      rs1_val = $urandom; rs2_val = $urandom;
      #1;
      chk(32'(i1), 32'(ei1), "i1");
      chk(32'(i2), 32'(ei2), "i2");
      chk(rs1_new, rs1_val + 32'(ei1), "rs1+i1");
      chk(rs2_new, rs2_val + 32'(ei2), "rs2+i2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
