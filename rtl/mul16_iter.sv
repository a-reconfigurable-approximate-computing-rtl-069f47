// mul16_iter: 16x16 unsigned multiplier that reuses one 8x8 multiplier.
//
// Following the paper's hierarchical scheme, the operands are split into
// bytes (AH, AL, BH, BL) and the single approx_mul8 computes AL*BL, AH*BL,
// AL*BH and AH*BH on four consecutive cycles; each byte product is shifted
// into place and accumulated.  Every byte product uses the same error control.
//
// Timing: start is sampled on a rising edge (operands and error
// control latched); busy is high
// for the next four cycles; in the cycle after busy falls, product holds the
// result and stays there until the next start.  A start while busy is ignored.
module mul16_iter (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] a,
  input  logic [15:0] b,
  input  logic        approx,
  input  logic [7:0]  err,
  output logic        busy,
  output logic [31:0] product
);
  logic [15:0] a_q, b_q;
  logic        approx_q;
  logic [7:0]  err_q;
  logic [1:0]  step;
  logic [7:0]  opa, opb;
  logic [15:0] pp;
  logic [4:0]  shamt;

  // step 0: AL*BL, 1: AH*BL, 2: AL*BH, 3: AH*BH
  always_comb begin
    opa   = step[0] ? a_q[15:8] : a_q[7:0];
    opb   = step[1] ? b_q[15:8] : b_q[7:0];
    shamt = (step[0] ^ step[1]) ? 5'd8 : (step[1] ? 5'd16 : 5'd0);
  end

  approx_mul8 u_mul8 (.a(opa), .b(opb), .approx(approx_q), .err(err_q), .p(pp));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q     <= '0;
      b_q     <= '0;
      approx_q <= 1'b0;
      err_q   <= '0;
      step    <= '0;
      busy    <= 1'b0;
      product <= '0;
    end else if (start && !busy) begin
      a_q     <= a;
      b_q     <= b;
      approx_q <= approx;
      err_q   <= err;
      step    <= '0;
      busy    <= 1'b1;
      product <= '0;
    end else if (busy) begin
      product <= product + (32'(pp) << shamt);
      step    <= step + 2'd1;
      if (step == 2'd3) busy <= 1'b0;
    end
  end
endmodule
