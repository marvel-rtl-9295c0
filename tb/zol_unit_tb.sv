// zol_unit_tb: checks the loop-register values written by each loop
// instruction, and the fetch-side loop-back: a loop of N iterations must
// redirect the fetch from ZE to ZS exactly N-1 times and tag N loop ends,
// with ZC decrementing at each committed end.
module zol_unit_tb;
  import marvel_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  zol_op_e op; logic [31:0] instr, pc, rs1_val, fetch_pc, loop_target, zc, zs, ze;
  logic end_commit, id_end_pending, is_end, loop_back;
  int checks = 0, failures = 0;

  zol_unit dut (.clk, .rst_n, .op, .instr, .pc, .rs1_val, .end_commit, .id_end_pending,
                .fetch_pc, .is_end, .loop_back, .loop_target, .zc, .zs, .ze);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; if (failures < 15) $display("%s got %h exp %h", s, g, e); end
  endtask

  task automatic exec(input zol_op_e o, input logic [31:0] ins, input logic [31:0] p, input logic [31:0] r);
    @(negedge clk); op = o; instr = ins; pc = p; rs1_val = r;
    @(negedge clk); op = ZOL_NONE;
  endtask

  // simple model of the fetch loop: one instruction fetched per cycle,
  // committed two cycles later (decode + execute)
  task automatic run_loop(input int body_words, input int iters, input logic [31:0] start);
    logic [31:0] fpc; logic tag_id, tag_ex; int backs, ends, fetched;
    fpc = start; tag_id = 0; tag_ex = 0; backs = 0; ends = 0; fetched = 0;
    while (fpc < start + 4 * body_words + 8 && fetched < 1000) begin
      @(negedge clk);
      end_commit = tag_ex; id_end_pending = tag_id; fetch_pc = fpc;
      #1;
      if (loop_back) begin backs++; fpc = loop_target; end else fpc = fpc + 4;
      if (is_end) ends++;
      tag_ex = tag_id; tag_id = is_end; fetched++;
    end
    // drain the two in-flight instructions
    repeat (2) begin
      @(negedge clk); end_commit = tag_ex; id_end_pending = tag_id; fetch_pc = 32'hFFFF_0000;
      tag_ex = tag_id; tag_id = 0;
    end
    @(negedge clk); end_commit = 0; id_end_pending = 0;
    chk(backs, iters - 1, "loop-backs");
    chk(ends, iters, "loop ends");
    chk(fetched, body_words * iters + 2, "fetch count (zero overhead)");
    chk(zc, 0, "ZC exhausted");
  endtask

  initial begin
    op = ZOL_NONE; instr = 0; pc = 0; rs1_val = 0; fetch_pc = 0; end_commit = 0; id_end_pending = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // dlp x5, 16 at pc 0x100 with count 7
    exec(ZOL_DLP, dlp(5'd5, 12'd16), 32'h100, 32'd7);
    chk(zc, 7, "dlp zc"); chk(zs, 32'h104, "dlp zs"); chk(ze, 32'h110, "dlp ze");
    run_loop(4, 7, 32'h104);
    // dlpi 3, 8 at 0x200
    exec(ZOL_DLPI, dlpi(5'd3, 12'd8), 32'h200, 32'd99);
    chk(zc, 3, "dlpi zc"); chk(zs, 32'h204, "dlpi zs"); chk(ze, 32'h208, "dlpi ze");
    run_loop(2, 3, 32'h204);
    // zlp x1, imm1=2, imm2=6 at 0x300 with count 5
    exec(ZOL_ZLP, zlp(5'd1, 8'd2, 10'd6), 32'h300, 32'd5);
    chk(zc, 5, "zlp zc"); chk(zs, 32'h308, "zlp zs"); chk(ze, 32'h318, "zlp ze");
    run_loop(5, 5, 32'h308);
    // single-instruction body, count 4
    exec(ZOL_DLPI, dlpi(5'd4, 12'd4), 32'h400, 0);
    run_loop(1, 4, 32'h404);
    // set.zc / set.zs / set.ze
    exec(ZOL_SETZS, setzs(10'd3), 32'h500, 0);
    exec(ZOL_SETZE, setze(10'd5), 32'h504, 0);
    exec(ZOL_SETZC, setzc(5'd2), 32'h508, 32'd6);
    chk(zs, 32'h50C, "set.zs"); chk(ze, 32'h518, "set.ze"); chk(zc, 6, "set.zc");
    run_loop(4, 6, 32'h50C);
    // inactive loop: no loop-back when ZC = 0
    @(negedge clk); fetch_pc = ze; #1; chk(32'(is_end), 0, "inactive");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
