// multiplier_unit: the M-extension multiply unit (MUL, MULH, MULHSU, MULHU).
//
// Structure as in the paper's execution-unit figure: a self-control part
// decodes funct3 (signedness, low or high word), an approximation-control
// part reads mulcsr, and the operational part holds the arithmetic circuits.
// Slot 0 is the accurate circuit and slot 1 the default error-configurable
// circuit; both are the hierarchical 32-bit multiplier (mul32_hier), slot 0
// with approximation tied off.  Slots 2 and 3 are reserved and, as a choice
// of this design, fall back to slot 0.  The circuit ON/OFF decoder gives the
// start pulse and the operands only to the selected circuit, so the other
// one does not toggle, and the output multiplexer takes its result.
// Slot 1 is used when mulcsr[0] = 1 and mulcsr[2:1] = 01; its error control
// is mulcsr[23:16].
//
// Signed operands are multiplied as magnitudes and the 64-bit product is
// negated when the signs differ.  Timing: start on a rising edge latches
// funct3 and the signs; busy is high for four cycles; result is valid from
// the cycle busy falls until the next start (latency 5 cycles from start).
module multiplier_unit
  import phoenix_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  funct3,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  input  exec_csr_t   csr,
  output logic        busy,
  output logic [31:0] result
);
  // self control: funct3 = 000 MUL, 001 MULH, 010 MULHSU, 011 MULHU.
  // MUL is treated as signed x signed: its low word is the same as for
  // unsigned operands when exact, and an approximate circuit then works on
  // magnitudes (a small negative factor stays small).
  logic a_signed, b_signed;
  always_comb begin
    a_signed = (funct3[1:0] != 2'b11);
    b_signed = (funct3[1:0] == 2'b01) || (funct3[1:0] == 2'b00);
  end

  logic        a_neg, b_neg;
  logic [31:0] a_mag, b_mag;
  always_comb begin
    a_neg = a_signed & rs1[31];
    b_neg = b_signed & rs2[31];
    a_mag = a_neg ? -rs1 : rs1;
    b_mag = b_neg ? -rs2 : rs2;
  end

  // approximation control and circuit ON/OFF decoder
  logic sel_apx, sel_apx_q;
  assign sel_apx = approx_active(csr);

  logic        neg_q, high_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      neg_q     <= 1'b0;
      high_q    <= 1'b0;
      sel_apx_q <= 1'b0;
    end else if (start && !busy) begin
      neg_q     <= a_neg ^ b_neg;
      high_q    <= (funct3[1:0] != 2'b00);
      sel_apx_q <= sel_apx;
    end
  end

  logic [1:0]  slot_start;
  logic [31:0] slot_a [2];
  logic [31:0] slot_b [2];
  logic [1:0]  slot_busy;
  logic [63:0] slot_p [2];

  always_comb begin
    slot_start = '0;
    for (int s = 0; s < 2; s++) begin
      slot_a[s] = '0;
      slot_b[s] = '0;
    end
    slot_start[sel_apx] = start;
    slot_a[sel_apx]     = a_mag;
    slot_b[sel_apx]     = b_mag;
  end

  mul32_hier u_accurate (.clk, .rst_n, .start(slot_start[0]), .a(slot_a[0]), .b(slot_b[0]),
                         .approx(1'b0), .err(8'h00), .busy(slot_busy[0]), .product(slot_p[0]));
  mul32_hier u_approx   (.clk, .rst_n, .start(slot_start[1]), .a(slot_a[1]), .b(slot_b[1]),
                         .approx(1'b1), .err(csr.error_control[7:0]),
                         .busy(slot_busy[1]), .product(slot_p[1]));

  logic [63:0] prod, prod_s;
  always_comb begin
    prod   = sel_apx_q ? slot_p[1] : slot_p[0];
    prod_s = neg_q ? -prod : prod;
    result = high_q ? prod_s[63:32] : prod_s[31:0];
  end

  assign busy = |slot_busy;
endmodule
