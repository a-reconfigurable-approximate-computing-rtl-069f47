// tb_immediate_generator: random instruction words, every format, against
// an independent bit-by-bit immediate reference.
module tb_immediate_generator;
  import phoenix_pkg::*;
  logic [31:0] instruction, immediate;
  instr_type_e itype;
  int checks = 0, failures = 0;

  immediate_generator dut (.*);

  function automatic logic [31:0] ref_imm(logic [31:0] w, instr_type_e ty);
    int v;
    case (ty)
      TYPE_I: v = int'($signed(w)) >>> 20;
      TYPE_S: v = ((int'($signed(w)) >>> 25) << 5) | int'(w[11:7]);
      TYPE_B: v = ((int'($signed(w)) >>> 31) << 12) | (int'(w[7]) << 11) | (int'(w[30:25]) << 5) | (int'(w[11:8]) << 1);
      TYPE_U: v = int'(w & 32'hFFFF_F000);
      TYPE_J: v = ((int'($signed(w)) >>> 31) << 20) | (int'(w[19:12]) << 12) | (int'(w[20]) << 11) | (int'(w[30:21]) << 1);
      default: v = 0;
    endcase
    return 32'(v);
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_type_e tys [6] = '{TYPE_R, TYPE_I, TYPE_S, TYPE_B, TYPE_U, TYPE_J};
    for (int i = 0; i < 6000; i++) begin
      instruction = $urandom; itype = tys[i % 6];
      #1 checks++;
      if (immediate != ref_imm(instruction, itype)) begin
        failures++;
        if (failures < 10) $display("FAIL type %0d word %h got %h exp %h", itype, instruction, immediate, ref_imm(instruction, itype));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
