// tb_address_generator: pc-relative targets (JAL, branches, AUIPC),
// rs1-relative addresses (loads, stores, JALR with bit 0 cleared).
module tb_address_generator;
  import phoenix_pkg::*;
  logic [6:0]  opcode;
  logic [31:0] pc, rs1, immediate, address;
  int checks = 0, failures = 0;

  address_generator dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    opcode_e ops [6] = '{OP_JAL, OP_BRANCH, OP_AUIPC, OP_LOAD, OP_STORE, OP_JALR};
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] exp;
      opcode = ops[i % 6]; pc = $urandom; rs1 = $urandom; immediate = $urandom;
      case (i % 6)
        0, 1, 2: exp = pc + immediate;
        3, 4:    exp = rs1 + immediate;
        default: exp = (rs1 + immediate) & ~32'h1;
      endcase
      #1 checks++;
      if (address != exp) begin failures++; if (failures < 5) $display("FAIL op %h got %h exp %h", opcode, address, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
