// muldiv_tb: random and corner-case RV32M operations against a 64-bit
// reference; checks that multiplies complete in the start cycle and
// divisions take 33 cycles.
module muldiv_tb;
  logic clk = 0, rst_n = 0;
  logic start; logic [2:0] op; logic [31:0] a, b, y;
  logic busy, done;
  int checks = 0, failures = 0;

  muldiv dut (.clk, .rst_n, .start, .op, .a, .b, .busy, .done, .y);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] ref_md(logic [2:0] o, logic [31:0] x, logic [31:0] z);
    longint sx, sz; longint unsigned ux, uz;
    logic [63:0] p;
    sx = longint'($signed(x)); sz = longint'($signed(z)); ux = {32'b0, x}; uz = {32'b0, z};
    case (o)
      3'd0: begin p = sx * sz; return p[31:0]; end
      3'd1: begin p = sx * sz; return p[63:32]; end
      3'd2: begin p = sx * longint'(uz); return p[63:32]; end
      3'd3: begin p = ux * uz; return p[63:32]; end
      3'd4: begin if (z == 0) return '1; if (x == 32'h8000_0000 && z == '1) return x; p = sx / sz; return p[31:0]; end
      3'd5: begin if (z == 0) return '1; return x / z; end
      3'd6: begin if (z == 0) return x; if (x == 32'h8000_0000 && z == '1) return 0; p = sx % sz; return p[31:0]; end
      default: begin if (z == 0) return x; return x % z; end
    endcase
  endfunction

  initial begin
    int n; logic [31:0] e;
    start = 0; op = 0; a = 0; b = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      op = 3'(it % 8);
      a = (it % 13 == 0) ? 32'h8000_0000 : $urandom;
      b = (it % 11 == 0) ? 32'hFFFF_FFFF : (it % 9 == 0) ? 32'h0 : (it % 4 == 0) ? 32'($urandom_range(1, 300)) : $urandom;
      e = ref_md(op, a, b);
      start = 1;
      n = 0;
      #1;
      while (!done) begin
        @(negedge clk); start = 0; n++;
        if (n > 100) break;
      end
      checks++;
      if (y !== e) begin failures++; if (failures < 10) $display("op %0d a=%h b=%h y=%h exp=%h", op, a, b, y, e); end
      checks++;
      if (n != (op[2] ? 33 : 0)) begin failures++; $display("op %0d latency %0d", op, n); end
      start = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
