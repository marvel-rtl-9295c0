// muldiv: RV32M multiply / divide unit ("MUL" of the execute stage).
//
// Multiplications (mul, mulh, mulhsu, mulhu; funct3 0-3) finish in the cycle
// they start: done is raised combinationally with the start pulse and y holds
// the selected half of the 64-bit product. Divisions (div, divu, rem, remu;
// funct3 4-7) use a restoring divider that produces one quotient bit per
// cycle on magnitudes: start loads it, busy stays high for 32 cycles, and
// done/y are valid in the following cycle (33 cycles after start), after
// which the unit is idle again. Division by zero and the signed overflow case
// (-2^31 / -1) return the values the RISC-V M specification prescribes.
// The paper states that the base core supports multiplication, division and
// remainder in hardware; the single-cycle multiplier and the bit-serial
// divider are this design's choices.
module muldiv #(
  parameter int unsigned XLEN = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [2:0]      op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] y
);
  localparam int unsigned CW = $clog2(XLEN + 1);

  // ---------------- multiply (combinational) ----------------
  logic signed [XLEN:0]     ma, mb;
  logic signed [2*XLEN+1:0] prod;
  logic [XLEN-1:0]          mul_y;
  always_comb begin
    ma = (op == 3'd1 || op == 3'd2) ? {a[XLEN-1], a} : {1'b0, a};
    mb = (op == 3'd1)               ? {b[XLEN-1], b} : {1'b0, b};
    prod = ma * mb;
    mul_y = (op == 3'd0) ? prod[XLEN-1:0] : prod[2*XLEN-1:XLEN];
  end

  // ---------------- divide (iterative) ----------------
  logic [XLEN-1:0] quo, rem_r, dvsr;
  logic [CW-1:0]   cnt;
  logic            is_rem, neg_q, neg_r, div0, ovf, finish;
  logic [XLEN-1:0] dividend_in, a_abs, b_abs, div_res, saved_a;
  logic            sgn;
  logic [XLEN:0]   trial;
  logic [XLEN-1:0] rem_shift;

  always_comb begin
    sgn   = ~op[0];                       // div, rem are signed
    a_abs = (sgn && a[XLEN-1]) ? -a : a;
    b_abs = (sgn && b[XLEN-1]) ? -b : b;
    dividend_in = a_abs;
    rem_shift = {rem_r[XLEN-2:0], quo[XLEN-1]};
    trial = {1'b0, rem_shift} - {1'b0, dvsr};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; finish <= 1'b0; cnt <= '0;
      quo <= '0; rem_r <= '0; dvsr <= '0;
      is_rem <= 1'b0; neg_q <= 1'b0; neg_r <= 1'b0; div0 <= 1'b0; ovf <= 1'b0;
      saved_a <= '0;
    end else begin
      finish <= 1'b0;
      if (start && op[2] && !busy) begin
        busy    <= 1'b1;
        cnt     <= CW'(XLEN);
        quo     <= dividend_in;
        rem_r   <= '0;
        dvsr    <= b_abs;
        saved_a <= a;
        is_rem  <= op[1];
        neg_q   <= sgn && (a[XLEN-1] ^ b[XLEN-1]) && (b != '0);
        neg_r   <= sgn && a[XLEN-1];
        div0    <= (b == '0);
        ovf     <= sgn && (a == {1'b1, {(XLEN-1){1'b0}}}) && (b == '1);
      end else if (busy) begin
        if (!trial[XLEN]) begin
          rem_r <= trial[XLEN-1:0];
          quo   <= {quo[XLEN-2:0], 1'b1};
        end else begin
          rem_r <= rem_shift;
          quo   <= {quo[XLEN-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy   <= 1'b0;
          finish <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    if (div0)
      div_res = is_rem ? saved_a : '1;
    else if (ovf)
      div_res = is_rem ? '0 : saved_a;
    else if (is_rem)
      div_res = neg_r ? -rem_r : rem_r;
    else
      div_res = neg_q ? -quo : quo;
  end

  assign done = (start && !op[2]) || finish;
  assign y    = finish ? div_res : mul_y;
endmodule
