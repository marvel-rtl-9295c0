// marvel_core_tb: runs a directed program on the core with small program
// and data memories. The program exercises RV32I arithmetic, RV32M (with a
// 33-cycle division stall), byte/halfword/word loads and stores (load-use
// directly after a load), taken and not-taken branches, jal/jalr, a run of
// back-to-back mac instructions, add2i, fusedmac (including rs1 = x21 so
// that the multiply must use the old value), and all loop instructions
// (dlpi, dlp with a one-instruction body, zlp, set.zs/set.ze/set.zc).
// It then stores x1..x31 to memory and halts. The bench checks every
// register against hand-computed values, the number of stalls, flushes and
// loop-backs, that eight consecutive macs retire in eight consecutive
// cycles, and that the total cycle count has no bubbles beyond stalls and
// flushes (zero-overhead loops).
module marvel_core_tb;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pm_en, dm_en, dm_we, halted;
  logic [31:0] pm_addr, pm_rdata, dm_addr, dm_wdata, dm_rdata;
  logic [3:0] dm_be;
  logic ev_retire, ev_stall, ev_flush, ev_zol_back, ev_mac, ev_add2i, ev_fusedmac, ev_div;
  logic h_pm_we, h_dm_en, h_dm_we;
  logic [31:0] h_pm_addr, h_pm_wdata, h_dm_addr, h_dm_wdata, h_dm_rdata;
  int checks = 0, failures = 0;
  int cycles = 0, n_retire = 0, n_stall = 0, n_flush = 0, n_back = 0, n_mac = 0, n_add2i = 0,
      n_fm = 0, n_div = 0, mac_run = 0, mac_run_max = 0;
  logic [31:0] prog [$];
  logic [31:0] expv [32];

  marvel_core dut (.clk, .rst_n, .pm_en, .pm_addr, .pm_rdata, .dm_en, .dm_we, .dm_be, .dm_addr,
                   .dm_wdata, .dm_rdata, .halted, .ev_retire, .ev_stall, .ev_flush, .ev_zol_back,
                   .ev_mac, .ev_add2i, .ev_fusedmac, .ev_div);
  prog_mem #(.WORDS(256)) u_pm (.clk, .en(pm_en), .addr(pm_addr), .rdata(pm_rdata),
                               .wr_en(h_pm_we), .wr_addr(h_pm_addr), .wr_data(h_pm_wdata));
  data_mem #(.WORDS(1024)) u_dm (.clk, .a_en(dm_en), .a_we(dm_we), .a_be(dm_be), .a_addr(dm_addr),
                                .a_wdata(dm_wdata), .a_rdata(dm_rdata), .b_en(h_dm_en), .b_we(h_dm_we),
                                .b_addr(h_dm_addr), .b_wdata(h_dm_wdata), .b_rdata(h_dm_rdata));
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && !halted) begin
    cycles++;
    n_retire += int'(ev_retire); n_stall += int'(ev_stall); n_flush += int'(ev_flush);
    n_back += int'(ev_zol_back); n_mac += int'(ev_mac); n_add2i += int'(ev_add2i);
    n_fm += int'(ev_fusedmac); n_div += int'(ev_div);
    mac_run = ev_mac ? mac_run + 1 : 0;
    if (mac_run > mac_run_max) mac_run_max = mac_run;
  end

  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; $display("%s: got %h expected %h", s, g, e); end
  endtask

  initial begin
    // ---------------- program ----------------
    prog.push_back(addi(1, 0, 100));          // 0
    prog.push_back(addi(2, 0, -7));           // 1
    prog.push_back(add(3, 1, 2));             // 2
    prog.push_back(sub(4, 1, 2));             // 3
    prog.push_back(mul(5, 1, 2));             // 4
    prog.push_back(mulh(6, 2, 2));            // 5
    prog.push_back(div(7, 1, 2));             // 6
    prog.push_back(remu(8, 1, 2));            // 7
    prog.push_back(slt(9, 2, 1));             // 8
    prog.push_back(lui(10, 20'h12345));       // 9
    prog.push_back(auipc(11, 20'h1));         // 10
    prog.push_back(addi(12, 0, 32'h400));     // 11
    prog.push_back(sw(5, 12, 0));             // 12
    prog.push_back(lb(13, 12, 0));            // 13
    prog.push_back(lb(14, 12, 1));            // 14
    prog.push_back(lbu(15, 12, 1));           // 15
    prog.push_back(lh(16, 12, 2));            // 16
    prog.push_back(sb(1, 12, 5));             // 17
    prog.push_back(sh(2, 12, 6));             // 18
    prog.push_back(lw(17, 12, 4));            // 19
    prog.push_back(add(18, 17, 17));          // 20 load-use
    prog.push_back(beq(1, 2, 8));             // 21 not taken
    prog.push_back(bne(1, 2, 8));             // 22 taken
    prog.push_back(addi(19, 0, 1));           // 23 skipped
    prog.push_back(blt(2, 1, 8));             // 24 taken
    prog.push_back(addi(19, 19, 2));          // 25 skipped
    prog.push_back(bge(2, 1, 8));             // 26 not taken
    prog.push_back(addi(19, 19, 4));          // 27
    prog.push_back(jal(23, 8));               // 28
    prog.push_back(addi(19, 19, 8));          // 29 skipped
    prog.push_back(auipc(24, 0));             // 30
    prog.push_back(jalr(25, 24, 12));         // 31 -> 33
    prog.push_back(addi(19, 19, 16));         // 32 skipped
    prog.push_back(addi(21, 0, 3));           // 33
    prog.push_back(addi(22, 0, 5));           // 34
    prog.push_back(addi(20, 0, 10));          // 35
    repeat (8) prog.push_back(mac());         // 36..43
    prog.push_back(add2i(26, 27, 31, 1023));  // 44
    prog.push_back(fusedmac(21, 22, 1, 2));   // 45
    prog.push_back(dlpi(5, 8));               // 46 body 47..48, 5 times
    prog.push_back(addi(28, 28, 1));          // 47
    prog.push_back(addi(29, 29, 2));          // 48
    prog.push_back(addi(30, 0, 3));           // 49
    prog.push_back(dlp(30, 4));               // 50 body 51, 3 times
    prog.push_back(fusedmac(21, 22, 1, 2));   // 51
    prog.push_back(zlp(30, 1, 2));            // 52 body 53..54, 3 times
    prog.push_back(add(31, 31, 30));          // 53
    prog.push_back(add2i(26, 27, 1, 1));      // 54
    prog.push_back(setzs(3));                 // 55 ZS = 58
    prog.push_back(setze(3));                 // 56 ZE = 59
    prog.push_back(setzc(30));                // 57 ZC = 3
    prog.push_back(addi(1, 1, 1));            // 58
    prog.push_back(addi(2, 2, -1));           // 59
    for (int r = 1; r < 32; r++) prog.push_back(sw(5'(r), 0, 256 + 4 * r));
    prog.push_back(ebreak());

    expv = '{default: 0};
    expv[1] = 103; expv[2] = -10; expv[3] = 93; expv[4] = 107; expv[5] = -700; expv[6] = 0;
    expv[7] = -14; expv[8] = 100; expv[9] = 1; expv[10] = 32'h12345000; expv[11] = 32'h1028;
    expv[12] = 32'h400; expv[13] = 32'h44; expv[14] = 32'hFFFFFFFD; expv[15] = 32'hFD;
    expv[16] = 32'hFFFFFFFF; expv[17] = 32'hFFF96400; expv[18] = 32'hFFF2C800; expv[19] = 4;
    expv[20] = 284; expv[21] = 7; expv[22] = 13; expv[23] = 116; expv[24] = 120; expv[25] = 128;
    expv[26] = 34; expv[27] = 1026; expv[28] = 5; expv[29] = 10; expv[30] = 3; expv[31] = 9;

    // ---------------- load ----------------
    h_pm_we = 0; h_dm_en = 0; h_dm_we = 0; h_pm_addr = 0; h_pm_wdata = 0; h_dm_addr = 0; h_dm_wdata = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); h_pm_we = 1; h_pm_addr = 4 * i; h_pm_wdata = (i < prog.size()) ? prog[i] : 32'h13;
    end
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); h_pm_we = 0; h_dm_en = 1; h_dm_we = 1; h_dm_addr = 4 * i; h_dm_wdata = 0;
    end
    @(negedge clk); h_dm_en = 0; h_dm_we = 0;
    rst_n = 1;
    wait (halted);
    repeat (2) @(negedge clk);
    for (int r = 1; r < 32; r++) begin
      h_dm_en = 1; h_dm_addr = 256 + 4 * r;
      @(negedge clk); h_dm_en = 0;
      chk(h_dm_rdata, expv[r], $sformatf("x%0d", r));
    end
    chk(n_retire, 106, "retired instructions");
    chk(n_stall, 2 * 33 + 5, "stall cycles (div and remu 33 each, five loads 1 each)");
    chk(n_flush, 4 + 6, "flushes (4 taken branches/jumps, 6 loop-register writes)");
    chk(n_back, 4 + 2 + 2 + 2, "zero-overhead loop-backs");
    chk(mac_run_max, 8, "eight macs in eight consecutive cycles");
    chk(n_mac, 8, "mac count"); chk(n_add2i, 4, "add2i count"); chk(n_fm, 4, "fusedmac count");
    chk(n_div, 2, "division count (div, remu)");
    chk(cycles, n_retire + n_stall + n_flush + 2, "cycles = retired + stalls + flushes + fill");
    $display("cycles=%0d retired=%0d stalls=%0d flushes=%0d loopbacks=%0d", cycles, n_retire, n_stall, n_flush, n_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
