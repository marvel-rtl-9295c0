// fusedmac_unit_tb: encodes fusedmac instructions and checks the three
// results (x20 + x21*x22, rs1 + i1, rs2 + i2) computed in the bench.
module fusedmac_unit_tb;
  import rv_asm_pkg::*;
  logic [31:0] instr, rs1_val, rs2_val, x20, x21, x22, rs1_new, rs2_new, x20_new;
  logic [4:0] ei1; logic [9:0] ei2;
  int checks = 0, failures = 0;
  fusedmac_unit dut (.instr, .rs1_val, .rs2_val, .x20, .x21, .x22, .rs1_new, .rs2_new, .x20_new);
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
      instr = fusedmac(5'($urandom), 5'($urandom), ei1, ei2);
      rs1_val = $urandom; rs2_val = $urandom; x20 = $urandom; x21 = $urandom; x22 = $urandom;
      #1;
      chk(x20_new, x20 + x21 * x22, "x20");
      chk(rs1_new, rs1_val + 32'(ei1), "rs1");
      chk(rs2_new, rs2_val + 32'(ei2), "rs2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
