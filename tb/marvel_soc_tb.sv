// marvel_soc_tb: end-to-end run of the full-size top level (default
// parameters) on a LeNet-5*-shaped int8 network:
//   conv1  1 x 28 x 28 input, 12 filters 6x6, stride 2 -> 12 x 12 x 12, ReLU
//   conv2  12 x 12 x 12,      32 filters 6x6, stride 2 -> 32 x 4 x 4,   ReLU
//   dense  512 -> 10 logits
// plus a short epilogue that divides the sum of the logits by 10.
// Inputs and weights are random int8 values (activations are kept as 32-bit
// words, arithmetic wraps modulo 2^32). The program is generated by
// this bench: each convolution kernel row is one zero-overhead loop
// (dlpi, 6 iterations) whose body is the fully unrolled kx loop of
// load / load / fusedmac with post-incremented pointers, followed by an add2i
// that steps the input pointer to the next row; the dense layer is one
// zero-overhead loop per output (dlp, 512 iterations) of load / load / mac /
// add2i. Outer loops use ordinary branches. The bench computes the network
// in SystemVerilog, compares every stored activation and logit, and checks
// the exact number of mac, fusedmac, add2i, loop-back and division events,
// and that load stalls and branch flushes occurred.
module marvel_soc_tb;
  import rv_asm_pkg::*;
  localparam int IN1 = 32'h1000, W1 = 32'h2000, OUT1 = 32'h3000, W2 = 32'h5000, OUT2 = 32'h9000,
                 W3 = 32'hA000, OUT3 = 32'hC000, MEAN = 32'hC100;

  logic clk = 0, rst_n = 0, core_run = 0;
  logic host_pm_we, host_dm_en, host_dm_we, halted;
  logic [31:0] host_pm_addr, host_pm_wdata, host_dm_addr, host_dm_wdata, host_dm_rdata;
  logic ev_retire, ev_stall, ev_flush, ev_zol_back, ev_mac, ev_add2i, ev_fusedmac, ev_div;
  int checks = 0, failures = 0;
  longint cycles = 0, n_retire = 0, n_stall = 0, n_flush = 0, n_back = 0, n_mac = 0, n_add2i = 0,
          n_fm = 0, n_div = 0;

  marvel_soc dut (.clk, .rst_n, .core_run, .host_pm_we, .host_pm_addr, .host_pm_wdata,
                  .host_dm_en, .host_dm_we, .host_dm_addr, .host_dm_wdata, .host_dm_rdata,
                  .halted, .ev_retire, .ev_stall, .ev_flush, .ev_zol_back, .ev_mac, .ev_add2i,
                  .ev_fusedmac, .ev_div);
  always #5 clk = ~clk;

  initial begin
    #40000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (core_run && !halted) begin
    cycles++;
    n_retire += longint'(ev_retire); n_stall += longint'(ev_stall); n_flush += longint'(ev_flush);
    n_back += longint'(ev_zol_back); n_mac += longint'(ev_mac); n_add2i += longint'(ev_add2i);
    n_fm += longint'(ev_fusedmac); n_div += longint'(ev_div);
  end

  // ---------------- data ----------------
  byte         in1 [784];
  byte         w1  [12*36];
  byte         w2  [32*12*36];
  byte         w3  [10*512];
  logic [31:0] a1  [12*144];
  logic [31:0] a2  [512];
  logic [31:0] lg  [10];
  logic [31:0] mean;
  logic [31:0] prog [$];

  task automatic emit(input logic [31:0] w); prog.push_back(w); endtask
  task automatic li(input logic [4:0] rd, input int v);
    int lo, hi;
    lo = v & 12'hFFF; if (lo >= 2048) lo -= 4096;
    hi = (v - lo) >>> 12;
    if (hi != 0) begin emit(lui(rd, 20'(hi))); emit(addi(rd, rd, lo)); end
    else emit(addi(rd, 0, lo));
  endtask
  function automatic int here(); return prog.size(); endfunction
  function automatic int back(input int label); return 4 * (label - prog.size()); endfunction

  // convolution: C x H x W input (element size es bytes), F filters K x K,
  // stride S, output F x OH x OW words, ReLU
  task automatic emit_conv(input int inb, wb, outb, C, H, W, K, S, F, es);
    int OH, OW, lf, loy, lox, lc;
    OH = (H - K) / S + 1; OW = (W - K) / S + 1;
    li(7, outb); li(8, wb); li(1, 0);
    li(11, C); li(12, OW); li(13, OH); li(14, F);
    lf = here();
      li(10, inb); li(2, 0);
    loy = here();
      emit(addi(9, 10, 0)); li(3, 0);
    lox = here();
      emit(addi(20, 0, 0)); emit(addi(5, 9, 0)); emit(addi(6, 8, 0)); li(4, 0);
    lc = here();
      emit(dlpi(5'(K), 12'(4 * (3 * K + 1))));
      for (int kx = 0; kx < K; kx++) begin
        emit(es == 1 ? lb(21, 5, 0) : lw(21, 5, 0));
        emit(lb(22, 6, 0));
        emit(fusedmac(6, 5, 5'd1, 10'(es)));
      end
      emit(add2i(6, 5, 5'd0, 10'((W - K) * es)));
      emit(addi(5, 5, (H * W - K * W) * es));
      emit(addi(4, 4, 1));
      emit(blt(4, 11, back(lc)));
      emit(bge(20, 0, 8));
      emit(addi(20, 0, 0));
      emit(sw(20, 7, 0));
      emit(addi(7, 7, 4));
      emit(addi(9, 9, S * es));
      emit(addi(3, 3, 1));
      emit(blt(3, 12, back(lox)));
      emit(addi(10, 10, S * W * es));
      emit(addi(2, 2, 1));
      emit(blt(2, 13, back(loy)));
      emit(addi(8, 8, C * K * K));
      emit(addi(1, 1, 1));
      emit(blt(1, 14, back(lf)));
  endtask

  task automatic emit_dense(input int inb, wb, outb, N, M);
    int lo;
    li(7, outb); li(8, wb); li(1, 0); li(14, M); li(15, N);
    lo = here();
      emit(addi(20, 0, 0)); li(5, inb); emit(addi(6, 8, 0));
      emit(dlp(15, 12'(4 * 4)));
      emit(lw(21, 5, 0));
      emit(lb(22, 6, 0));
      emit(mac());
      emit(add2i(6, 5, 5'd1, 10'd4));
      emit(sw(20, 7, 0));
      emit(addi(7, 7, 4));
      emit(addi(8, 8, N));
      emit(addi(1, 1, 1));
      emit(blt(1, 14, back(lo)));
  endtask

  task automatic host_write(input int addr, input logic [31:0] v);
    @(negedge clk); host_dm_en = 1; host_dm_we = 1; host_dm_addr = addr; host_dm_wdata = v;
    @(negedge clk); host_dm_en = 0; host_dm_we = 0;
  endtask
  task automatic host_write_bytes(input int addr, input byte b [], input int n);
    for (int i = 0; i < n; i += 4)
      host_write(addr + i, {b[i+3], b[i+2], b[i+1], b[i]});
  endtask
  task automatic host_read(input int addr, output logic [31:0] v);
    @(negedge clk); host_dm_en = 1; host_dm_we = 0; host_dm_addr = addr;
    @(negedge clk); host_dm_en = 0; v = host_dm_rdata;
  endtask
  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; if (failures < 20) $display("%s: got %h expected %h", s, g, e); end
  endtask
  task automatic chk_ge(input longint g, input longint lo, input string s);
    checks++;
    if (g < lo) begin failures++; $display("%s: %0d, expected at least %0d", s, g, lo); end
  endtask

  initial begin
    logic [31:0] v, sum;
    host_pm_we = 0; host_pm_addr = 0; host_pm_wdata = 0;
    host_dm_en = 0; host_dm_we = 0; host_dm_addr = 0; host_dm_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // random int8 data: inputs 0..15, weights -4..4
    foreach (in1[i]) in1[i] = byte'($urandom_range(0, 15));
    foreach (w1[i])  w1[i]  = byte'($urandom_range(0, 8) - 4);
    foreach (w2[i])  w2[i]  = byte'($urandom_range(0, 8) - 4);
    foreach (w3[i])  w3[i]  = byte'($urandom_range(0, 8) - 4);

    // reference network
    for (int f = 0; f < 12; f++) for (int oy = 0; oy < 12; oy++) for (int ox = 0; ox < 12; ox++) begin
      logic [31:0] acc; acc = 0;
      for (int ky = 0; ky < 6; ky++) for (int kx = 0; kx < 6; kx++)
        acc += 32'(int'(in1[(2*oy+ky)*28 + 2*ox+kx])) * 32'(int'(w1[f*36 + ky*6 + kx]));
      a1[f*144 + oy*12 + ox] = $signed(acc) < 0 ? 0 : acc;
    end
    for (int f = 0; f < 32; f++) for (int oy = 0; oy < 4; oy++) for (int ox = 0; ox < 4; ox++) begin
      logic [31:0] acc; acc = 0;
      for (int c = 0; c < 12; c++) for (int ky = 0; ky < 6; ky++) for (int kx = 0; kx < 6; kx++)
        acc += a1[c*144 + (2*oy+ky)*12 + 2*ox+kx] * 32'(int'(w2[((f*12 + c)*6 + ky)*6 + kx]));
      a2[f*16 + oy*4 + ox] = $signed(acc) < 0 ? 0 : acc;
    end
    sum = 0;
    for (int o = 0; o < 10; o++) begin
      logic [31:0] acc; acc = 0;
      for (int i = 0; i < 512; i++) acc += a2[i] * 32'(int'(w3[o*512 + i]));
      lg[o] = acc; sum += acc;
    end
    mean = 32'($signed(sum) / 10);

    // program
    emit_conv(IN1, W1, OUT1, 1, 28, 28, 6, 2, 12, 1);
    emit_conv(OUT1, W2, OUT2, 12, 12, 12, 6, 2, 32, 4);
    emit_dense(OUT2, W3, OUT3, 512, 10);
    // epilogue: mean of the logits
    li(5, OUT3); li(20, 0); li(4, 10);
    emit(dlpi(5'd10, 12'(4 * 3)));
    emit(lw(21, 5, 0));
    emit(add2i(5, 20, 5'd4, 10'd0));
    emit(add(20, 20, 21));
    emit(div(20, 20, 4));
    li(7, MEAN); emit(sw(20, 7, 0));
    emit(ebreak());
    $display("program: %0d instructions", prog.size());

    foreach (prog[i]) begin
      @(negedge clk); host_pm_we = 1; host_pm_addr = 4 * i; host_pm_wdata = prog[i];
    end
    @(negedge clk); host_pm_we = 0;
    host_write_bytes(IN1, in1, 784);
    host_write_bytes(W1, w1, 12*36);
    host_write_bytes(W2, w2, 32*12*36);
    host_write_bytes(W3, w3, 10*512);

    @(negedge clk); core_run = 1;
    wait (halted);
    core_run = 0;
    repeat (2) @(negedge clk);

    for (int i = 0; i < 12*144; i++) begin host_read(OUT1 + 4*i, v); chk(v, a1[i], $sformatf("conv1[%0d]", i)); end
    for (int i = 0; i < 512; i++)    begin host_read(OUT2 + 4*i, v); chk(v, a2[i], $sformatf("conv2[%0d]", i)); end
    for (int i = 0; i < 10; i++)     begin host_read(OUT3 + 4*i, v); chk(v, lg[i], $sformatf("logit[%0d]", i)); end
    host_read(MEAN, v); chk(v, mean, "mean of logits");

    chk(32'(n_fm),   12*144*36 + 32*16*12*36, "fusedmac count");
    chk(32'(n_mac),  10*512, "mac count");
    chk(32'(n_add2i), 12*144*6 + 32*16*12*6 + 10*512 + 10, "add2i count");
    chk(32'(n_back), 12*144*5 + 32*16*12*5 + 10*511 + 9, "zero-overhead loop-backs");
    chk(32'(n_div),  1, "division count");
    chk_ge(n_stall, 2 * (12*144*36 + 32*16*12*36), "load stalls");
    chk_ge(n_flush, 12*144 + 32*16*12, "branch/loop-setup flushes");
    $display("cycles=%0d retired=%0d stalls=%0d flushes=%0d loopbacks=%0d mac=%0d fusedmac=%0d add2i=%0d",
             cycles, n_retire, n_stall, n_flush, n_back, n_mac, n_fm, n_add2i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
