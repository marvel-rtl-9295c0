// regfile: 32 x 32-bit integer register file with five read and three write
// ports.
//
// x0 always reads zero and ignores writes. Read ports 0 and 1 serve rs1 and
// rs2; ports 2..4 are the taps that the mac datapath uses to read its fixed
// registers (x20, x21, x22) in the same decode cycle as rs1/rs2, which a
// fusedmac needs. Three write ports exist because a fusedmac updates rs1,
// rs2 and the accumulator x20 in one execute cycle: port 0 carries rd (or
// the add2i rs1 result), port 1 the add2i rs2 result, port 2 the mac
// accumulator. If two ports name the same register in one cycle the
// highest-numbered port wins (this design's choice). Writes take effect at
// the rising edge; reads are combinational and bypass same-cycle writes
// (write-through), so the decode stage sees the value the execute stage is
// writing. Synchronous active-low reset clears all registers.
module regfile #(
  parameter int unsigned XLEN  = 32,
  parameter int unsigned NREGS = 32,
  parameter int unsigned NRP   = 5,
  parameter int unsigned NWP   = 3,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NRP-1:0][AW-1:0]     raddr,
  output logic [NRP-1:0][XLEN-1:0]   rdata,
  input  logic [NWP-1:0]             we,
  input  logic [NWP-1:0][AW-1:0]     waddr,
  input  logic [NWP-1:0][XLEN-1:0]   wdata
);
  logic [XLEN-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else begin
      for (int p = 0; p < NWP; p++)
        if (we[p] && waddr[p] != '0) regs[waddr[p]] <= wdata[p];
    end
  end

  always_comb begin
    for (int r = 0; r < NRP; r++) begin
      rdata[r] = regs[raddr[r]];
      for (int p = 0; p < NWP; p++)
        if (we[p] && waddr[p] == raddr[r]) rdata[r] = wdata[p];
      if (raddr[r] == '0) rdata[r] = '0;
    end
  end
endmodule
