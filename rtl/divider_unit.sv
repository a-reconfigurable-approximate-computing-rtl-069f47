// divider_unit: the M-extension divide unit (DIV, DIVU, REM, REMU).
//
// Same three-part structure as the other execution units.  Slot 0 is the
// accurate circuit, slot 1 the default accuracy-controllable non-restoring
// divider (both nr_divider, slot 0 with approximation tied off); slots 2 and
// 3 are reserved and fall back to slot 0 (this design's choice).  Slot 1 is
// used when divcsr[0] = 1 and divcsr[2:1] = 01, and takes its error level
// from divcsr[23:16]; at error level zero it divides exactly, as the paper
// requires.  The circuit ON/OFF decoder starts and feeds only the selected
// circuit.  Timing: start on a rising edge; busy high for 32 - skip cycles;
// result valid from the cycle busy falls until the next start.
module divider_unit
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
  logic sel_apx, sel_apx_q;
  assign sel_apx = approx_active(csr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                sel_apx_q <= 1'b0;
    else if (start && !busy)   sel_apx_q <= sel_apx;
  end

  logic [1:0]  slot_start, slot_busy;
  logic [31:0] slot_a [2];
  logic [31:0] slot_b [2];
  logic [31:0] slot_r [2];

  always_comb begin
    slot_start = '0;
    for (int s = 0; s < 2; s++) begin
      slot_a[s] = '0;
      slot_b[s] = '0;
    end
    slot_start[sel_apx] = start;
    slot_a[sel_apx]     = rs1;
    slot_b[sel_apx]     = rs2;
  end

  nr_divider u_accurate (.clk, .rst_n, .start(slot_start[0]), .funct3, .rs1(slot_a[0]),
                         .rs2(slot_b[0]), .approx(1'b0), .err(8'h00),
                         .busy(slot_busy[0]), .result(slot_r[0]));
  nr_divider u_approx   (.clk, .rst_n, .start(slot_start[1]), .funct3, .rs1(slot_a[1]),
                         .rs2(slot_b[1]), .approx(1'b1), .err(csr.error_control[7:0]),
                         .busy(slot_busy[1]), .result(slot_r[1]));

  assign busy   = |slot_busy;
  assign result = sel_apx_q ? slot_r[1] : slot_r[0];
endmodule
