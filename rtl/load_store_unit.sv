// load_store_unit: data-memory access of the memory/write-back stage.
//
// Drives a 32-bit word-organised data memory: dmem_addr is the word-aligned
// byte address, dmem_be the byte enables, dmem_wdata the store data shifted
// into its byte lanes.  Loads (LB, LH, LW, LBU, LHU) take the addressed
// bytes from dmem_rdata and sign- or zero-extend them.  The memory is
// assumed to answer in the same cycle (combinational read, write on the
// clock edge); misaligned accesses are not handled.  The paper shows this
// unit between the EX/MW register and the D$ without detail.  Combinational.
module load_store_unit
  import phoenix_pkg::*;
(
  input  logic        valid,
  input  logic [6:0]  opcode,
  input  logic [2:0]  funct3,
  input  logic [31:0] address,
  input  logic [31:0] store_data,
  output logic [31:0] dmem_addr,
  output logic        dmem_re,
  output logic        dmem_we,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata,
  output logic [31:0] load_data
);
  logic [1:0]  off;
  logic [31:0] sh;

  always_comb begin
    off        = address[1:0];
    dmem_addr  = {address[31:2], 2'b00};
    dmem_re    = valid && (opcode == OP_LOAD);
    dmem_we    = valid && (opcode == OP_STORE);
    unique case (funct3[1:0])
      2'b00:   dmem_be = 4'b0001 << off;
      2'b01:   dmem_be = 4'b0011 << off;
      default: dmem_be = 4'b1111;
    endcase
    if (!dmem_we && !dmem_re) dmem_be = 4'b0000;
    dmem_wdata = store_data << (8 * off);

    sh = dmem_rdata >> (8 * off);
    unique case (funct3)
      3'b000:  load_data = {{24{sh[7]}},  sh[7:0]};
      3'b001:  load_data = {{16{sh[15]}}, sh[15:0]};
      3'b100:  load_data = {24'b0, sh[7:0]};
      3'b101:  load_data = {16'b0, sh[15:0]};
      default: load_data = dmem_rdata;
    endcase
  end
endmodule
