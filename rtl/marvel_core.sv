// marvel_core: three-stage RV32IM core with the mac, add2i, fusedmac and
// zero-overhead-loop extensions (the fully extended "v4" processor).
//
// Pipeline:
//   fetch   fetch_unit chooses the address and reads the program memory
//           (one-cycle synchronous read); zol_unit may redirect the next
//           fetch from the loop end ZE to the loop start ZS.
//   decode  decoder + register file read (rs1, rs2 and the fixed mac
//           registers x20, x21, x22); the register file bypasses the
//           execute stage's same-cycle writes, so no hazard stalls exist.
//   execute ALU, branch/jump resolution, RV32M unit, load/store unit, the
//           mac/add2i/fusedmac units, loop-register setup and write-back.
// A taken branch or jump, and any loop-register write, redirects fetch and
// kills the instruction in decode (one bubble). Loads spend two cycles in
// execute because the data memory answers one cycle after the request;
// divisions hold execute for 33 cycles. ecall/ebreak/SWBRK stop the core
// and raise halted. The event outputs pulse once per occurrence and let a
// test bench or a performance counter observe the mechanisms.
// Write ports: 0 = rd (or add2i/fusedmac rs1), 1 = add2i/fusedmac rs2,
// 2 = x20 for mac/fusedmac.
// The stage count, ISA, extension datapaths, opcodes, fixed registers and
// single-cycle memory latency follow the paper; the base-core
// microarchitecture (forwarding, flush, load timing, divider) is this
// design's own, since the paper builds on a vendor core it does not detail.
module marvel_core
  import marvel_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  // program memory
  output logic        pm_en,
  output logic [31:0] pm_addr,
  input  logic [31:0] pm_rdata,
  // data memory
  output logic        dm_en,
  output logic        dm_we,
  output logic [3:0]  dm_be,
  output logic [31:0] dm_addr,
  output logic [31:0] dm_wdata,
  input  logic [31:0] dm_rdata,
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
  // ---------------- fetch ----------------
  logic        stall, redirect, halt_now;
  logic [31:0] redirect_pc, fetch_pc;
  logic        id_valid, id_zol_end;
  logic [31:0] id_pc;
  logic        zol_is_end, zol_back;
  logic [31:0] zol_target;

  fetch_unit #(.RESET_PC(RESET_PC)) u_fetch (
    .clk, .rst_n, .stall, .halt(halt_now), .redirect, .redirect_pc,
    .fetch_pc, .zol_is_end, .zol_loop_back(zol_back), .zol_target,
    .pm_en, .pm_addr, .id_valid, .id_pc, .id_zol_end
  );

  // ---------------- decode ----------------
  ctrl_t        id_ctrl;
  logic [4:0][4:0]  rf_raddr;
  logic [4:0][31:0] rf_rdata;
  logic [2:0]       rf_we;
  logic [2:0][4:0]  rf_waddr;
  logic [2:0][31:0] rf_wdata;

  decoder u_dec (.instr(pm_rdata), .ctrl(id_ctrl));

  assign rf_raddr[0] = id_ctrl.rs1;
  assign rf_raddr[1] = id_ctrl.rs2;
  assign rf_raddr[2] = MAC_RD;
  assign rf_raddr[3] = MAC_RS1;
  assign rf_raddr[4] = MAC_RS2;

  regfile u_rf (
    .clk, .rst_n, .raddr(rf_raddr), .rdata(rf_rdata),
    .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata)
  );

  // ---------------- decode -> execute register ----------------
  logic        ex_valid, ex_zol_end;
  ctrl_t       ex_ctrl;
  logic [31:0] ex_pc, ex_instr, ex_rs1, ex_rs2, ex_x20, ex_x21, ex_x22;
  logic [5:0]  ex_cyc;   // cycles already spent in execute by this instruction
  logic        id_kill;

  assign id_kill = redirect || halt_now;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ex_valid <= 1'b0; ex_zol_end <= 1'b0; ex_ctrl <= '0; ex_pc <= '0;
      ex_instr <= '0; ex_rs1 <= '0; ex_rs2 <= '0;
      ex_x20 <= '0; ex_x21 <= '0; ex_x22 <= '0; ex_cyc <= '0;
    end else if (stall) begin
      ex_cyc <= ex_cyc + 1'b1;
    end else begin
      ex_valid   <= id_valid && !id_kill && !halted;
      ex_zol_end <= id_valid && !id_kill && id_zol_end;
      ex_ctrl    <= id_ctrl;
      ex_pc      <= id_pc;
      ex_instr   <= pm_rdata;
      ex_rs1     <= rf_rdata[0];
      ex_rs2     <= rf_rdata[1];
      ex_x20     <= rf_rdata[2];
      ex_x21     <= rf_rdata[3];
      ex_x22     <= rf_rdata[4];
      ex_cyc     <= '0;
    end
  end

  // ---------------- execute ----------------
  logic [31:0] alu_a, alu_b, alu_y;
  logic        br_take;
  logic [31:0] pc4;

  always_comb begin
    unique case (ex_ctrl.a_sel)
      ASEL_PC:   alu_a = ex_pc;
      ASEL_ZERO: alu_a = '0;
      default:   alu_a = ex_rs1;
    endcase
    alu_b = ex_ctrl.b_imm ? ex_ctrl.imm : ex_rs2;
    pc4   = ex_pc + 32'd4;
    unique case (ex_ctrl.funct3)
      3'b000:  br_take = (ex_rs1 == ex_rs2);
      3'b001:  br_take = (ex_rs1 != ex_rs2);
      3'b100:  br_take = ($signed(ex_rs1) <  $signed(ex_rs2));
      3'b101:  br_take = ($signed(ex_rs1) >= $signed(ex_rs2));
      3'b110:  br_take = (ex_rs1 <  ex_rs2);
      3'b111:  br_take = (ex_rs1 >= ex_rs2);
      default: br_take = 1'b0;
    endcase
  end

  alu u_alu (.op(ex_ctrl.alu_op), .a(alu_a), .b(alu_b), .y(alu_y));

  // RV32M
  logic        md_start, md_busy, md_done;
  logic [31:0] md_y;
  assign md_start = ex_valid && (ex_ctrl.is_mul || ex_ctrl.is_div) && ex_cyc == '0;
  muldiv u_md (
    .clk, .rst_n, .start(md_start), .op(ex_ctrl.funct3), .a(ex_rs1), .b(ex_rs2),
    .busy(md_busy), .done(md_done), .y(md_y)
  );

  // load/store
  logic [31:0] ld_data;
  logic [1:0]  ld_lo_q;
  logic [2:0]  ld_f3_q;
  logic        mem_first;
  assign mem_first = ex_valid && (ex_ctrl.is_load || ex_ctrl.is_store) && ex_cyc == '0;

  lsu u_lsu (
    .addr(alu_y), .funct3(ex_ctrl.funct3), .is_store(ex_ctrl.is_store),
    .store_data(ex_rs2), .dm_be, .dm_wdata,
    .rdata_word(dm_rdata), .load_addr_lo(ld_lo_q), .load_funct3(ld_f3_q),
    .load_data(ld_data)
  );

  assign dm_en   = mem_first;
  assign dm_we   = mem_first && ex_ctrl.is_store;
  assign dm_addr = {alu_y[31:2], 2'b00};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ld_lo_q <= '0; ld_f3_q <= '0;
    end else if (mem_first) begin
      ld_lo_q <= alu_y[1:0]; ld_f3_q <= ex_ctrl.funct3;
    end
  end

  // custom extension units
  logic [31:0] mac_y, a2_rs1, a2_rs2, fm_rs1, fm_rs2, fm_x20;
  logic [I1_W-1:0] a2_i1;
  logic [I2_W-1:0] a2_i2;

  mac_unit u_mac (.acc(ex_x20), .a(ex_x21), .b(ex_x22), .y(mac_y));

  add2i_unit u_add2i (
    .instr(ex_instr), .rs1_val(ex_rs1), .rs2_val(ex_rs2),
    .i1(a2_i1), .i2(a2_i2), .rs1_new(a2_rs1), .rs2_new(a2_rs2)
  );

  fusedmac_unit u_fusedmac (
    .instr(ex_instr), .rs1_val(ex_rs1), .rs2_val(ex_rs2),
    .x20(ex_x20), .x21(ex_x21), .x22(ex_x22),
    .rs1_new(fm_rs1), .rs2_new(fm_rs2), .x20_new(fm_x20)
  );

  // zero-overhead loops
  logic        ex_done, end_commit, id_end_pending;
  logic [31:0] zc, zs, ze;
  zol_op_e     zop;

  assign zop            = ex_valid ? ex_ctrl.zol_op : ZOL_NONE;
  assign end_commit     = ex_valid && ex_zol_end && ex_done;
  assign id_end_pending = id_valid && id_zol_end && !id_kill && !stall;

  zol_unit u_zol (
    .clk, .rst_n, .op(zop), .instr(ex_instr), .pc(ex_pc), .rs1_val(ex_rs1),
    .end_commit, .id_end_pending, .fetch_pc,
    .is_end(zol_is_end), .loop_back(zol_back), .loop_target(zol_target),
    .zc, .zs, .ze
  );

  // stall, redirect, halt
  always_comb begin
    stall = 1'b0;
    if (ex_valid) begin
      if (ex_ctrl.is_load && ex_cyc == '0)                   stall = 1'b1;
      if ((ex_ctrl.is_mul || ex_ctrl.is_div) && !md_done)    stall = 1'b1;
    end
    ex_done = !stall;

    redirect    = 1'b0;
    redirect_pc = pc4;
    if (ex_valid) begin
      if (ex_ctrl.is_jal || (ex_ctrl.is_branch && br_take)) begin
        redirect = 1'b1; redirect_pc = ex_pc + ex_ctrl.imm;
      end else if (ex_ctrl.is_jalr) begin
        redirect = 1'b1; redirect_pc = {alu_y[31:1], 1'b0};
      end else if (ex_ctrl.zol_op != ZOL_NONE) begin
        redirect = 1'b1; redirect_pc = pc4;
      end
    end
    halt_now = ex_valid && ex_ctrl.is_halt;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)        halted <= 1'b0;
    else if (halt_now) halted <= 1'b1;
  end

  // write-back
  always_comb begin
    rf_we    = '0;
    rf_waddr = '{default: '0};
    rf_wdata = '{default: '0};
    rf_waddr[0] = ex_ctrl.rd;
    rf_waddr[1] = ex_ctrl.rs2;
    rf_waddr[2] = MAC_RD;
    if (ex_valid && ex_done) begin
      if (ex_ctrl.rd_we) begin
        rf_we[0] = 1'b1;
        if (ex_ctrl.is_jal || ex_ctrl.is_jalr)      rf_wdata[0] = pc4;
        else if (ex_ctrl.is_load)                   rf_wdata[0] = ld_data;
        else if (ex_ctrl.is_mul || ex_ctrl.is_div)  rf_wdata[0] = md_y;
        else                                        rf_wdata[0] = alu_y;
      end
      if (ex_ctrl.is_add2i) begin
        rf_we[0] = 1'b1; rf_wdata[0] = a2_rs1;
        rf_we[1] = 1'b1; rf_wdata[1] = a2_rs2;
      end
      if (ex_ctrl.is_fusedmac) begin
        rf_we[0] = 1'b1; rf_wdata[0] = fm_rs1;
        rf_we[1] = 1'b1; rf_wdata[1] = fm_rs2;
        rf_we[2] = 1'b1; rf_wdata[2] = fm_x20;
      end
      if (ex_ctrl.is_mac) begin
        rf_we[2] = 1'b1; rf_wdata[2] = mac_y;
      end
    end
  end

  // events
  assign ev_retire   = ex_valid && ex_done;
  assign ev_stall    = stall;
  assign ev_flush    = redirect;
  assign ev_zol_back = zol_back && pm_en;
  assign ev_mac      = ev_retire && ex_ctrl.is_mac;
  assign ev_add2i    = ev_retire && ex_ctrl.is_add2i;
  assign ev_fusedmac = ev_retire && ex_ctrl.is_fusedmac;
  assign ev_div      = ev_retire && ex_ctrl.is_div;

  // the execute stage never asks for a redirect while it stalls
  a_no_redirect_in_stall: assert property (@(posedge clk) disable iff (!rst_n)
    !(stall && redirect));
endmodule
