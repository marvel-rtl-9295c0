// prog_mem: program memory (PM) of the modified Harvard core.
//
// A word-wide block RAM with two ports. The core port reads: addr is a byte
// address, the word it names appears on rdata one clock after en is high
// (no output register, single-cycle read latency, as the core requires), and
// rdata holds its value while en is low, which the fetch stage uses to keep
// the decode-stage instruction during a stall. The host port writes whole
// words and stands in for the program download that the on-chip debugger
// performs in the original system. WORDS is this design's choice (128 KiB);
// the contents are not reset.
module prog_mem #(
  parameter int unsigned WORDS = 32768,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic        clk,
  input  logic        en,
  input  logic [31:0] addr,
  output logic [31:0] rdata,
  input  logic        wr_en,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[AW+1:2]] <= wr_data;
    if (en)    rdata <= mem[addr[AW+1:2]];
  end
endmodule
