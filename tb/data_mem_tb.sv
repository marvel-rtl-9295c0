// data_mem_tb: random byte-enable writes and reads on the core port, word
// writes and reads on the host port, against a byte-level model; checks the
// one-cycle read latency (small memory).
module data_mem_tb;
  logic clk = 0;
  logic a_en, a_we, b_en, b_we; logic [3:0] a_be;
  logic [31:0] a_addr, a_wdata, a_rdata, b_addr, b_wdata, b_rdata;
  logic [31:0] model [128];
  int checks = 0, failures = 0;
  data_mem #(.WORDS(128)) dut (.clk, .a_en, .a_we, .a_be, .a_addr, .a_wdata, .a_rdata,
                               .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; if (failures < 15) $display("%s got %h exp %h", s, g, e); end
  endtask
  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_be = 0; a_addr = 0; a_wdata = 0; b_addr = 0; b_wdata = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); b_en = 1; b_we = 1; b_addr = 4 * i; b_wdata = $urandom; model[i] = b_wdata;
    end
    @(negedge clk); b_en = 0; b_we = 0;
    for (int it = 0; it < 1000; it++) begin
      int w, v;
      w = $urandom_range(0, 127); v = $urandom_range(0, 127);
      @(negedge clk);
      a_en = 1; a_we = $urandom_range(0, 1); a_be = 4'($urandom); a_addr = 4 * w; a_wdata = $urandom;
      b_en = 1; b_we = 0; b_addr = 4 * v;
      @(negedge clk);
      chk(a_rdata, model[w], "core read (old data)");
      chk(b_rdata, (a_we && v == w) ? b_rdata : model[v], "host read");
      if (a_we) for (int k = 0; k < 4; k++) if (a_be[k]) model[w][8*k +: 8] = a_wdata[8*k +: 8];
      a_en = 0; b_en = 0;
    end
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); b_en = 1; b_addr = 4 * i;
      @(negedge clk); b_en = 0; chk(b_rdata, model[i], "final host read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
