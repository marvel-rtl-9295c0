// marvel_soc: top level - the extended core with its program and data
// memories (modified Harvard organisation).
//
// The core fetches from prog_mem and loads/stores to port A of data_mem;
// both memories answer one cycle after a request. The original system loads
// programs and data and inspects results through a vendor on-chip debugger
// over JTAG; here plain host ports take that role: host_pm_* writes program
// words and host_dm_* reads or writes data words (result one cycle after
// host_dm_en). The core is held in reset while core_run is low, so the host
// can fill the memories first; it starts at address 0 when core_run rises
// and raises halted when it executes ecall, ebreak or SWBRK. The ev_* outputs
// pulse on the core's pipeline events (retire, stall, flush, zero-overhead
// loop-back, mac, add2i, fusedmac, division) for performance counting.
// Memory sizes are this design's choice: 128 KiB program, 64 MiB data.
module marvel_soc #(
  parameter int unsigned PM_WORDS = 32768,
  parameter int unsigned DM_WORDS = 16777216
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        core_run,
  // host access (stands in for the debugger path)
  input  logic        host_pm_we,
  input  logic [31:0] host_pm_addr,
  input  logic [31:0] host_pm_wdata,
  input  logic        host_dm_en,
  input  logic        host_dm_we,
  input  logic [31:0] host_dm_addr,
  input  logic [31:0] host_dm_wdata,
  output logic [31:0] host_dm_rdata,
  // status
  output logic        halted,
  output logic        ev_retire,
  output logic        ev_stall,
  output logic        ev_flush,
  output logic        ev_zol_back,
  output logic        ev_mac,
  output logic        ev_add2i,
  output logic        ev_fusedmac,
  output logic        ev_div
);
  logic        core_rst_n;
  logic        pm_en;
  logic [31:0] pm_addr, pm_rdata;
  logic        dm_en, dm_we;
  logic [3:0]  dm_be;
  logic [31:0] dm_addr, dm_wdata, dm_rdata;

  assign core_rst_n = rst_n && core_run;

  marvel_core u_core (
    .clk, .rst_n(core_rst_n),
    .pm_en, .pm_addr, .pm_rdata,
    .dm_en, .dm_we, .dm_be, .dm_addr, .dm_wdata, .dm_rdata,
    .halted, .ev_retire, .ev_stall, .ev_flush, .ev_zol_back,
    .ev_mac, .ev_add2i, .ev_fusedmac, .ev_div
  );

  prog_mem #(.WORDS(PM_WORDS)) u_pm (
    .clk, .en(pm_en), .addr(pm_addr), .rdata(pm_rdata),
    .wr_en(host_pm_we), .wr_addr(host_pm_addr), .wr_data(host_pm_wdata)
  );

  data_mem #(.WORDS(DM_WORDS)) u_dm (
    .clk,
    .a_en(dm_en), .a_we(dm_we), .a_be(dm_be), .a_addr(dm_addr),
    .a_wdata(dm_wdata), .a_rdata(dm_rdata),
    .b_en(host_dm_en), .b_we(host_dm_we), .b_addr(host_dm_addr),
    .b_wdata(host_dm_wdata), .b_rdata(host_dm_rdata)
  );
endmodule
