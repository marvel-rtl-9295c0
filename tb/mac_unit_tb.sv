// mac_unit_tb: y = acc + a*b (low 32 bits) on random and corner operands.
module mac_unit_tb;
  logic [31:0] acc, a, b, y;
  logic [63:0] full;
  int checks = 0, failures = 0;
  mac_unit dut (.acc, .a, .b, .y);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 3000; i++) begin
      acc = $urandom; a = $urandom; b = $urandom;
      if (i % 10 == 0) begin a = 32'hFFFF_FFFF; b = 32'hFFFF_FFFF; end
      if (i % 10 == 1) begin a = 32'($urandom_range(0, 255)) - 128; b = 32'($urandom_range(0, 255)) - 128; end
      #1;
      full = {32'b0, acc} + {32'b0, a} * {32'b0, b};
      checks++;
      if (y !== full[31:0]) begin failures++; if (failures < 10) $display("acc=%h a=%h b=%h y=%h", acc, a, b, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
