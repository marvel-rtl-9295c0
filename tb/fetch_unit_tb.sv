// fetch_unit_tb: sequential fetch, hold during a stall, redirect, loop-back
// target, loop-end tagging and halt.
module fetch_unit_tb;
  logic clk = 0, rst_n = 0;
  logic stall, halt, redirect, zol_is_end, zol_loop_back, pm_en, id_valid, id_zol_end;
  logic [31:0] redirect_pc, fetch_pc, zol_target, pm_addr, id_pc;
  int checks = 0, failures = 0;
  fetch_unit dut (.clk, .rst_n, .stall, .halt, .redirect, .redirect_pc, .fetch_pc,
                  .zol_is_end, .zol_loop_back, .zol_target, .pm_en, .pm_addr,
                  .id_valid, .id_pc, .id_zol_end);
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
    stall = 0; halt = 0; redirect = 0; redirect_pc = 0; zol_is_end = 0; zol_loop_back = 0; zol_target = 0;
    repeat (2) @(negedge clk);
    chk(32'(id_valid), 0, "reset valid");
    rst_n = 1; #1;
    chk(pm_addr, 0, "first fetch"); chk(32'(pm_en), 1, "en");
    for (int i = 1; i < 5; i++) begin
      @(negedge clk); chk(pm_addr, 4 * i, "seq"); chk(id_pc, 4 * (i - 1), "id pc"); chk(32'(id_valid), 1, "id valid");
    end
    // stall: hold
    stall = 1; #1; chk(32'(pm_en), 0, "stall en");
    @(negedge clk); chk(pm_addr, 16, "stall hold addr"); chk(id_pc, 12, "stall hold id");
    stall = 0;
    @(negedge clk); chk(pm_addr, 20, "after stall"); chk(id_pc, 16, "after stall id");
    // redirect
    redirect = 1; redirect_pc = 32'h80; #1; chk(pm_addr, 32'h80, "redirect addr"); chk(32'(pm_en), 1, "redirect en");
    @(negedge clk); redirect = 0; #1; chk(id_pc, 32'h80, "redirect id"); chk(pm_addr, 32'h84, "after redirect");
    // loop-back at 0x84 -> 0x40, tagged
    zol_is_end = 1; zol_loop_back = 1; zol_target = 32'h40;
    @(negedge clk); zol_is_end = 0; zol_loop_back = 0;
    chk(id_pc, 32'h84, "end id pc"); chk(32'(id_zol_end), 1, "end tag"); chk(pm_addr, 32'h40, "loop back");
    @(negedge clk); chk(32'(id_zol_end), 0, "tag cleared"); chk(pm_addr, 32'h44, "after loop");
    // halt
    halt = 1; #1; chk(32'(pm_en), 0, "halt en");
    @(negedge clk); halt = 0; chk(32'(id_valid), 0, "halt invalid");
    @(negedge clk); chk(32'(id_valid), 0, "stays halted"); chk(32'(pm_en), 0, "halted en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
