// regfile_tb: random writes through all three ports against a shadow model;
// checks x0, the write-through bypass and the port priority on collisions.
module regfile_tb;
  logic clk = 0, rst_n = 0;
  logic [4:0][4:0]  raddr;
  logic [4:0][31:0] rdata;
  logic [2:0]       we;
  logic [2:0][4:0]  waddr;
  logic [2:0][31:0] wdata;
  logic [31:0] shadow [32];
  logic [31:0] expv;
  int checks = 0, failures = 0;

  regfile dut (.clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input logic [31:0] got, input logic [31:0] e, input string what);
    checks++;
    if (got !== e) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, e);
    end
  endtask

  initial begin
    we = '0; waddr = '0; wdata = '0; raddr = '0;
    for (int r = 0; r < 32; r++) shadow[r] = '0;
    @(negedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        we[p] = $urandom_range(0, 1);
        waddr[p] = 5'($urandom);
        wdata[p] = $urandom;
      end
      if (it % 17 == 0) begin waddr[1] = waddr[0]; waddr[2] = waddr[0]; we = 3'b111; end
      for (int r = 0; r < 5; r++) raddr[r] = 5'($urandom);
      if (it % 3 == 0) raddr[0] = waddr[it % 3];
      #1;
      // bypass: reads see this cycle's writes, highest port wins
      for (int r = 0; r < 5; r++) begin
        expv = shadow[raddr[r]];
        for (int p = 0; p < 3; p++) if (we[p] && waddr[p] == raddr[r]) expv = wdata[p];
        if (raddr[r] == 0) expv = 0;
        check(rdata[r], expv, $sformatf("read port %0d addr %0d", r, raddr[r]));
      end
      @(posedge clk);
      for (int p = 0; p < 3; p++) if (we[p] && waddr[p] != 0) shadow[waddr[p]] = wdata[p];
    end
    // read back everything with no writes
    @(negedge clk); we = '0;
    for (int r = 0; r < 32; r++) begin
      raddr[0] = 5'(r); #1; check(rdata[0], shadow[r], $sformatf("final x%0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
