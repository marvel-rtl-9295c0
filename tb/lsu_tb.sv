// lsu_tb: checks byte enables and lane steering for sb/sh/sw at every
// aligned offset, and extraction/extension for lb/lh/lw/lbu/lhu.
module lsu_tb;
  logic [31:0] addr, store_data, dm_wdata, rdata_word, load_data;
  logic [2:0]  funct3, load_funct3;
  logic        is_store;
  logic [3:0]  dm_be;
  logic [1:0]  load_addr_lo;
  int checks = 0, failures = 0;

  lsu dut (.addr, .funct3, .is_store, .store_data, .dm_be, .dm_wdata,
           .rdata_word, .load_addr_lo, .load_funct3, .load_data);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input logic [31:0] g, e, input string s);
    checks++;
    if (g !== e) begin failures++; if (failures < 10) $display("%s got %h exp %h", s, g, e); end
  endtask

  initial begin
    logic [31:0] w, e; logic [7:0] bt; logic [15:0] hw;
    for (int it = 0; it < 300; it++) begin
      // stores
      is_store = 1; store_data = $urandom; addr = $urandom;
      for (int f = 0; f < 3; f++) begin
        funct3 = 3'(f);
        if (f == 1) addr[0] = 0;
        if (f == 2) addr[1:0] = 0;
        #1;
        for (int lane = 0; lane < 4; lane++) begin
          logic en_exp;
          en_exp = (f == 2) || (f == 1 && (lane / 2) == addr[1]) || (f == 0 && lane == addr[1:0]);
          chk(32'(dm_be[lane]), 32'(en_exp), "be");
          if (en_exp) begin
            case (f)
              0: chk(32'(dm_wdata[8*lane +: 8]), 32'(store_data[7:0]), "sb lane");
              1: chk(32'(dm_wdata[8*lane +: 8]), 32'(store_data[8*(lane%2) +: 8]), "sh lane");
              default: chk(32'(dm_wdata[8*lane +: 8]), 32'(store_data[8*lane +: 8]), "sw lane");
            endcase
          end
        end
      end
      is_store = 0; #1; chk(32'(dm_be), 0, "no store no be");
      // loads
      w = $urandom; rdata_word = w;
      for (int lo = 0; lo < 4; lo++) begin
        load_addr_lo = 2'(lo);
        bt = w[8*lo +: 8]; hw = (lo >= 2) ? w[31:16] : w[15:0];
        load_funct3 = 3'b000; #1; e = {{24{bt[7]}}, bt}; chk(load_data, e, "lb");
        load_funct3 = 3'b100; #1; e = {24'b0, bt}; chk(load_data, e, "lbu");
        load_funct3 = 3'b001; #1; e = {{16{hw[15]}}, hw}; chk(load_data, e, "lh");
        load_funct3 = 3'b101; #1; e = {16'b0, hw}; chk(load_data, e, "lhu");
        load_funct3 = 3'b010; #1; chk(load_data, w, "lw");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
