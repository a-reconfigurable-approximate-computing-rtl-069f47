// address_generator: accurate adder for addresses in the execute stage.
//
// Adds the immediate to pc (JAL, branches, AUIPC) or to rs1 (JALR, loads,
// stores).  JALR clears bit 0 of the sum as the RISC-V specification asks.
// The paper insists addresses use an exact adder, never the approximate one.
// The AUIPC result is also taken from here.  Combinational.
module address_generator
  import phoenix_pkg::*;
(
  input  logic [6:0]  opcode,
  input  logic [31:0] pc,
  input  logic [31:0] rs1,
  input  logic [31:0] immediate,
  output logic [31:0] address
);
  logic        use_rs1;
  logic [31:0] sum;
  always_comb begin
    use_rs1 = (opcode == OP_JALR) || (opcode == OP_LOAD) || (opcode == OP_STORE);
    sum     = (use_rs1 ? rs1 : pc) + immediate;
    address = (opcode == OP_JALR) ? {sum[31:1], 1'b0} : sum;
  end
endmodule
