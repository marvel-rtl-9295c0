// prog_mem_tb: host writes, one-cycle read latency and output hold while the
// read enable is low (small memory).
module prog_mem_tb;
  logic clk = 0, en, wr_en; logic [31:0] addr, rdata, wr_addr, wr_data;
  logic [31:0] model [64];
  int checks = 0, failures = 0;
  prog_mem #(.WORDS(64)) dut (.clk, .en, .addr, .rdata, .wr_en, .wr_addr, .wr_data);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; if (failures < 15) $display("%s got %h exp %h", s, g, e); end
  endtask
  initial begin
    en = 0; wr_en = 0; addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 4 * i; wr_data = $urandom; model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      int w; w = $urandom_range(0, 63);
      @(negedge clk); en = 1; addr = 4 * w + 32'($urandom_range(0, 3));
      @(negedge clk); en = 0; chk(rdata, model[w], "read after 1 cycle");
      addr = 4 * ((w + 1) % 64);
      @(negedge clk); chk(rdata, model[w], "hold while en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
