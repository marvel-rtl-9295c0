// alu_tb: checks every ALU operation on random and corner operands against
// a reference computed in the bench.
module alu_tb;
  import marvel_pkg::*;
  alu_op_e     op;
  logic [31:0] a, b, y, exp;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .y);

  function automatic logic [31:0] ref_alu(alu_op_e o, logic [31:0] x, logic [31:0] z);
    int signed sx, sz;
    sx = x; sz = z;
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x - z;
      ALU_SLL:  return x << z[4:0];
      ALU_SLT:  return (sx < sz) ? 1 : 0;
      ALU_SLTU: return (x < z) ? 1 : 0;
      ALU_XOR:  return x ^ z;
      ALU_SRL:  return x >> z[4:0];
      ALU_SRA:  return sx >>> z[4:0];
      ALU_OR:   return x | z;
      ALU_AND:  return x & z;
      default:  return z;
    endcase
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      op = alu_op_e'(i % 11);
      a = (i % 7 == 0) ? 32'h8000_0000 : $urandom;
      b = (i % 5 == 0) ? 32'hFFFF_FFFF : $urandom;
      #1;
      exp = ref_alu(op, a, b);
      checks++;
      if (y !== exp) begin
        failures++;
        if (failures < 10) $display("ALU mismatch op=%s a=%h b=%h y=%h exp=%h", op.name(), a, b, y, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
