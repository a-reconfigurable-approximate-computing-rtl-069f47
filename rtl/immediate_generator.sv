// immediate_generator: builds the sign-extended immediate of an RV32
// instruction from its bits, steered by the instruction type that the
// decoder supplies (I, S, B, U, J; R-type yields zero).  Bit placement is the
// RISC-V specification's.  Combinational.
module immediate_generator
  import phoenix_pkg::*;
(
  input  logic [31:0] instruction,
  input  instr_type_e itype,
  output logic [31:0] immediate
);
  logic [31:0] i;
  assign i = instruction;

  always_comb begin
    unique case (itype)
      TYPE_I: immediate = {{21{i[31]}}, i[30:20]};
      TYPE_S: immediate = {{21{i[31]}}, i[30:25], i[11:7]};
      TYPE_B: immediate = {{20{i[31]}}, i[7], i[30:25], i[11:8], 1'b0};
      TYPE_U: immediate = {i[31:12], 12'b0};
      TYPE_J: immediate = {{12{i[31]}}, i[19:12], i[20], i[30:21], 1'b0};
      default: immediate = '0;
    endcase
  end
endmodule
