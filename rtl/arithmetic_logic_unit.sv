// arithmetic_logic_unit: the RV32I integer ALU of the execution stage.
//
// Self-control: the unit decodes opcode/funct3/funct7 itself (OP and OP-IMM;
// funct7 is only looked at for register-register forms and SRAI).  The second
// operand is rs2 for OP and the immediate for OP-IMM.  ADD, ADDI and SUB go
// through the default accuracy-controllable carry-select adder
// (approx_csa32); every other operation is exact.  Approximation control:
// the adder is approximate when alucsr[0] = 1 and alucsr[2:1] = 01, with the
// error field alucsr[23:16]; any other setting (including the reserved slots
// 2 and 3) gives exact addition.  The paper says the same adder serves both
// accurate and approximate addition, so the ALU holds one adder.  The circuit
// ON/OFF decoder holds the adder's operands at zero when the instruction is
// not an add/sub, so it does not toggle.  Combinational.
module arithmetic_logic_unit
  import phoenix_pkg::*;
(
  input  logic [6:0]  opcode,
  input  logic [2:0]  funct3,
  input  logic [6:0]  funct7,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  input  logic [31:0] immediate,
  input  exec_csr_t   csr,
  output logic [31:0] result
);
  logic        is_op, is_imm, is_sub, is_addsub;
  logic [31:0] op_b;

  always_comb begin
    is_op     = (opcode == OP_OP);
    is_imm    = (opcode == OP_IMM);
    op_b      = is_op ? rs2 : immediate;
    is_sub    = is_op && (funct7 == FUNCT7_ALT);
    is_addsub = (is_op || is_imm) && (funct3 == 3'b000);
  end

  // circuit ON/OFF: operand isolation of the adder
  logic [31:0] add_a, add_b, add_s;
  assign add_a = is_addsub ? rs1  : '0;
  assign add_b = is_addsub ? op_b : '0;

  approx_csa32 u_adder (
    .a(add_a), .b(add_b), .sub(is_sub), .approx(approx_active(csr)),
    .err(csr.error_control[7:0]), .sum(add_s)
  );

  always_comb begin
    unique case (funct3)
      3'b000: result = add_s;
      3'b001: result = rs1 << op_b[4:0];
      3'b010: result = {31'b0, $signed(rs1) < $signed(op_b)};
      3'b011: result = {31'b0, rs1 < op_b};
      3'b100: result = rs1 ^ op_b;
      3'b101: result = funct7[5] ? 32'($signed(rs1) >>> op_b[4:0]) : rs1 >> op_b[4:0];
      3'b110: result = rs1 | op_b;
      default: result = rs1 & op_b;
    endcase
    if (!(is_op || is_imm)) result = '0;
  end
endmodule
