// lsu: load/store unit and data-memory controller of the execute stage.
//
// Store side (combinational, same cycle as the request): from the byte
// address and funct3 (sb/sh/sw) it forms the 4-bit byte-enable mask and
// replicates the store data onto the byte lanes the mask selects. Load side:
// the data memory returns the addressed word one cycle after the request;
// the core keeps the low address bits and funct3 of the load for that cycle
// and this unit then extracts the byte or halfword and sign- or
// zero-extends it (lb, lh, lw, lbu, lhu). Accesses are assumed naturally
// aligned; misaligned accesses are not trapped. The paper only names the
// LDST unit and the DM controller; their contents here are this design's.
module lsu #(
  parameter int unsigned XLEN = 32
) (
  // request
  input  logic [XLEN-1:0] addr,
  input  logic [2:0]      funct3,
  input  logic            is_store,
  input  logic [XLEN-1:0] store_data,
  output logic [3:0]      dm_be,
  output logic [XLEN-1:0] dm_wdata,
  // response (one cycle later)
  input  logic [XLEN-1:0] rdata_word,
  input  logic [1:0]      load_addr_lo,
  input  logic [2:0]      load_funct3,
  output logic [XLEN-1:0] load_data
);
  always_comb begin
    dm_be    = 4'b0000;
    dm_wdata = store_data;
    if (is_store) begin
      unique case (funct3[1:0])
        2'b00: begin
          dm_be    = 4'b0001 << addr[1:0];
          dm_wdata = {4{store_data[7:0]}};
        end
        2'b01: begin
          dm_be    = addr[1] ? 4'b1100 : 4'b0011;
          dm_wdata = {2{store_data[15:0]}};
        end
        default: begin
          dm_be    = 4'b1111;
          dm_wdata = store_data;
        end
      endcase
    end
  end

  logic [7:0]  lb;
  logic [15:0] lh;
  always_comb begin
    lb = rdata_word[8*load_addr_lo +: 8];
    lh = load_addr_lo[1] ? rdata_word[31:16] : rdata_word[15:0];
    unique case (load_funct3)
      3'b000:  load_data = {{24{lb[7]}}, lb};
      3'b001:  load_data = {{16{lh[15]}}, lh};
      3'b100:  load_data = {24'b0, lb};
      3'b101:  load_data = {16'b0, lh};
      default: load_data = rdata_word;
    endcase
  end
endmodule
