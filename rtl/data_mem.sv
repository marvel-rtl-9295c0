// data_mem: data memory (DM) of the modified Harvard core.
//
// A word-wide true dual-port block RAM. Port A belongs to the core: when
// a_en is high a_be selects the bytes a_wdata writes (a_we) and the whole
// addressed word appears on a_rdata one clock later (single-cycle read
// latency, read-before-write). Port B is a word-wide host port that loads
// inputs and weights and reads results back; it stands in for the debugger
// memory access of the original system. Addresses are byte addresses.
// WORDS is this design's choice (64 MiB, enough for the largest data
// footprint the paper reports, 43.62 MB); the contents are not reset.
module data_mem #(
  parameter int unsigned WORDS = 16777216,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic        clk,
  // port A: core
  input  logic        a_en,
  input  logic        a_we,
  input  logic [3:0]  a_be,
  input  logic [31:0] a_addr,
  input  logic [31:0] a_wdata,
  output logic [31:0] a_rdata,
  // port B: host
  input  logic        b_en,
  input  logic        b_we,
  input  logic [31:0] b_addr,
  input  logic [31:0] b_wdata,
  output logic [31:0] b_rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr[AW+1:2]];
      if (a_we)
        for (int i = 0; i < 4; i++)
          if (a_be[i]) mem[a_addr[AW+1:2]][8*i +: 8] <= a_wdata[8*i +: 8];
    end
    if (b_en) begin
      b_rdata <= mem[b_addr[AW+1:2]];
      if (b_we) mem[b_addr[AW+1:2]] <= b_wdata;
    end
  end
endmodule
