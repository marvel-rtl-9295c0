// fetch_unit: program control unit (PC, fetcher and program-memory
// controller) of the fetch stage.
//
// Each cycle it chooses the address to fetch: the execute stage's redirect
// target (taken branch, jump, or refetch after a loop-register write) if
// there is one, otherwise the next address it computed the cycle before.
// That next address is pc + 4, or the loop start ZS when the zero-overhead
// loop logic reports that the fetched address is the loop end (loop_back).
// The address goes to the program memory with pm_en; the instruction
// arrives one cycle later, when the unit presents its pc (id_pc), a valid
// bit and the loop-end tag to the decode stage. While the execute stage
// stalls, pm_en is low and everything holds, so the memory's output keeps
// the decode-stage instruction. After a halt no further instruction is
// delivered. The fetch-redirect-stall protocol is this design's choice; the
// paper only names the PC, fetcher and PM controller and says the program
// control was modified for the hardware loops.
module fetch_unit #(
  parameter int unsigned   XLEN     = 32,
  parameter logic [31:0]   RESET_PC = 32'h0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            stall,
  input  logic            halt,
  input  logic            redirect,
  input  logic [XLEN-1:0] redirect_pc,
  // zero-overhead loop interface
  output logic [XLEN-1:0] fetch_pc,
  input  logic            zol_is_end,
  input  logic            zol_loop_back,
  input  logic [XLEN-1:0] zol_target,
  // program memory
  output logic            pm_en,
  output logic [XLEN-1:0] pm_addr,
  // decode stage
  output logic            id_valid,
  output logic [XLEN-1:0] id_pc,
  output logic            id_zol_end
);
  logic [XLEN-1:0] pc_next;
  logic            halted_q;

  assign fetch_pc = redirect ? redirect_pc : pc_next;
  assign pm_en    = !halt && !halted_q && (redirect || !stall);
  assign pm_addr  = fetch_pc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc_next    <= RESET_PC;
      id_valid   <= 1'b0;
      id_pc      <= RESET_PC;
      id_zol_end <= 1'b0;
      halted_q   <= 1'b0;
    end else if (halt || halted_q) begin
      halted_q   <= 1'b1;
      id_valid   <= 1'b0;
      id_zol_end <= 1'b0;
    end else if (pm_en) begin
      id_valid   <= 1'b1;
      id_pc      <= fetch_pc;
      id_zol_end <= zol_is_end;
      pc_next    <= zol_loop_back ? zol_target : fetch_pc + XLEN'(4);
    end
  end
endmodule
