// tb_jump_branch_unit: the six branch conditions on random and equal
// operands, unconditional JAL/JALR, and no redirect for other opcodes.
module tb_jump_branch_unit;
  import phoenix_pkg::*;
  logic [6:0]  opcode;
  logic [2:0]  funct3;
  logic [31:0] rs1, rs2;
  logic        jump_branch_enable;
  int checks = 0, failures = 0;

  jump_branch_unit dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic exp;
      int   sa, sb;
      rs1 = $urandom; rs2 = (i % 5 == 0) ? rs1 : $urandom;
      if (i % 7 == 0) rs2 = ~rs1;
      funct3 = 3'($urandom);
      sa = int'(rs1); sb = int'(rs2);
      case (i % 4)
        0, 1: begin
          opcode = OP_BRANCH;
          case (funct3)
            0: exp = rs1 == rs2;  1: exp = rs1 != rs2;
            4: exp = sa < sb;     5: exp = sa >= sb;
            6: exp = rs1 < rs2;   7: exp = rs1 >= rs2;
            default: exp = 0;
          endcase
        end
        2: begin opcode = ($urandom & 1) ? OP_JAL : OP_JALR; exp = 1; end
        default: begin opcode = OP_OP; exp = 0; end
      endcase
      #1 checks++;
      if (jump_branch_enable != exp) begin failures++; if (failures < 5) $display("FAIL op %h f3 %0d", opcode, funct3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
