// jump_branch_unit: decides whether the instruction in the execute stage
// redirects the PC.  JAL and JALR always do; a branch does when its condition
// (BEQ, BNE, BLT, BGE, BLTU, BGEU by funct3) holds on rs1 and rs2.  Comparisons
// are exact.  The target comes from the address generator.  Combinational.
module jump_branch_unit
  import phoenix_pkg::*;
(
  input  logic [6:0]  opcode,
  input  logic [2:0]  funct3,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output logic        jump_branch_enable
);
  logic cond;
  always_comb begin
    unique case (funct3)
      3'b000:  cond = (rs1 == rs2);
      3'b001:  cond = (rs1 != rs2);
      3'b100:  cond = ($signed(rs1) <  $signed(rs2));
      3'b101:  cond = ($signed(rs1) >= $signed(rs2));
      3'b110:  cond = (rs1 <  rs2);
      3'b111:  cond = (rs1 >= rs2);
      default: cond = 1'b0;
    endcase
    jump_branch_enable = (opcode == OP_JAL) || (opcode == OP_JALR)
                      || ((opcode == OP_BRANCH) && cond);
  end
endmodule
