// tb_arithmetic_logic_unit: all RV32I OP / OP-IMM operations in exact mode
// against a behavioural reference, exact add/sub with the reserved slots and
// error field 0x0F, approximate add against the block model of the adder, and
// zero output for non-ALU opcodes.
module tb_arithmetic_logic_unit;
  import phoenix_pkg::*;
  logic [6:0]  opcode, funct7;
  logic [2:0]  funct3;
  logic [31:0] rs1, rs2, immediate, result;
  exec_csr_t   csr;
  int checks = 0, failures = 0;

  arithmetic_logic_unit dut (.*);

  function automatic logic [31:0] ref_alu(logic [6:0] op, logic [2:0] f3, logic [6:0] f7,
                                          logic [31:0] a, logic [31:0] r2, logic [31:0] im);
    logic [31:0] b = (op == OP_OP) ? r2 : im;
    case (f3)
      3'd0: return (op == OP_OP && f7[5]) ? a - b : a + b;
      3'd1: return a << b[4:0];
      3'd2: return ($signed(a) < $signed(b)) ? 1 : 0;
      3'd3: return (a < b) ? 1 : 0;
      3'd4: return a ^ b;
      3'd5: return f7[5] ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
      3'd6: return a | b;
      default: return a & b;
    endcase
  endfunction

  function automatic logic [31:0] ref_apx(logic [31:0] x, logic [31:0] y, logic s, logic [7:0] e);
    logic [31:0] yy = s ? ~y : y, r;
    logic c = s;
    logic [4:0] t;
    for (int k = 0; k < 8; k++) begin
      if (k < 4 && !e[k]) begin r[4*k +: 4] = x[4*k +: 4] | yy[4*k +: 4]; c = x[4*k+3] & yy[4*k+3]; end
      else begin t = {1'b0, x[4*k +: 4]} + {1'b0, yy[4*k +: 4]} + {4'b0, c}; r[4*k +: 4] = t[3:0]; c = t[4]; end
    end
    return r;
  endfunction

  task automatic chk(logic [31:0] exp, string what);
    #1 checks++;
    if (result !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s op=%h f3=%0d f7=%h a=%h b=%h imm=%h got %h exp %h",
                                  what, opcode, funct3, funct7, rs1, rs2, immediate, result, exp);
    end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      opcode = ($urandom & 1) ? OP_OP : OP_IMM;
      funct3 = 3'($urandom); rs1 = $urandom; rs2 = $urandom; immediate = $urandom;
      funct7 = ($urandom & 1) ? FUNCT7_ALT : 7'b0;
      if (opcode == OP_IMM && funct3 != 3'd5) funct7 = 7'($urandom);
      csr = '0;
      if (i % 3 == 1) begin csr.approx_enable = 1; csr.circuit_select = 2'($urandom_range(2, 3)); csr.error_control = 16'($urandom); end
      if (i % 3 == 2) begin csr.approx_enable = 1; csr.circuit_select = 2'b01; csr.error_control = 16'h000F; end
      chk(ref_alu(opcode, funct3, funct7, rs1, rs2, immediate), "exact");
    end
    for (int i = 0; i < 2000; i++) begin
      logic s;
      opcode = ($urandom & 1) ? OP_OP : OP_IMM; funct3 = 0;
      funct7 = (opcode == OP_OP && ($urandom & 1)) ? FUNCT7_ALT : 7'b0;
      s = (opcode == OP_OP) && funct7[5];
      rs1 = $urandom; rs2 = $urandom; immediate = $urandom;
      csr = '0; csr.approx_enable = 1; csr.circuit_select = 2'b01; csr.error_control = 16'($urandom);
      chk(ref_apx(rs1, (opcode == OP_OP) ? rs2 : immediate, s, csr.error_control[7:0]), "approx");
    end
    opcode = OP_LOAD; funct3 = 0; csr = '0;
    chk(32'h0, "non-ALU opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
