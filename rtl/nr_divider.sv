// nr_divider: iterative non-restoring 32-bit divider with error control.
//
// Handles DIV, DIVU, REM and REMU (funct3 100..111).  Signed operands are
// divided as magnitudes; the quotient is negated when the signs differ and
// the remainder takes the sign of the dividend.  Division by zero and the
// signed overflow case give the results the RISC-V specification defines.
//
// One quotient bit per cycle: the partial remainder R and the dividend /
// quotient register Q shift left together; R is reduced by the divisor when
// it is non-negative and increased by it when negative, and the new quotient
// bit is 1 when R ends non-negative.  A final correction adds the divisor back
// to a negative R.  This is the paper's non-restoring divider.
//
// Error control (this design's choice; the paper says only that the divider
// has an 8-bit error range and is exact at error level zero): with approx = 1
// the last min(err, 31) iterations are skipped.  Those low quotient bits are
// returned as zero and the remainder is made consistent with that truncated
// quotient (dividend = quotient * divisor + remainder still holds for
// magnitudes), and the division finishes that many cycles earlier.
//
// Timing: start sampled on a rising edge; busy is high for 32 - skip cycles
// (zero cycles for division by zero); result valid from the cycle busy falls
// until the next start.
module nr_divider (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  funct3,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  input  logic        approx,
  input  logic [7:0]  err,
  output logic        busy,
  output logic [31:0] result
);
  logic        is_signed, want_rem;
  logic        a_neg, b_neg;
  logic [31:0] a_mag, b_mag;
  logic [4:0]  skip;

  always_comb begin
    is_signed = ~funct3[0];
    want_rem  = funct3[1];
    a_neg     = is_signed & rs1[31];
    b_neg     = is_signed & rs2[31];
    a_mag     = a_neg ? -rs1 : rs1;
    b_mag     = b_neg ? -rs2 : rs2;
    skip      = !approx ? 5'd0 : ((err > 8'd31) ? 5'd31 : err[4:0]);
  end

  logic signed [32:0] r_q;
  logic [31:0]        q_q, d_q, dividend_q;
  logic [5:0]         iter_left;
  logic [4:0]         skip_q;
  logic               qneg_q, rneg_q, rem_q, divzero_q;

  logic signed [32:0] r_shift, r_next;
  always_comb begin
    r_shift = {r_q[31:0], q_q[31]};
    if (!r_q[32]) r_next = r_shift - $signed({1'b0, d_q});
    else          r_next = r_shift + $signed({1'b0, d_q});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q        <= '0;
      q_q        <= '0;
      d_q        <= '0;
      dividend_q <= '0;
      iter_left  <= '0;
      skip_q     <= '0;
      qneg_q     <= 1'b0;
      rneg_q     <= 1'b0;
      rem_q      <= 1'b0;
      divzero_q  <= 1'b0;
    end else if (start && !busy) begin
      r_q        <= '0;
      q_q        <= a_mag;
      d_q        <= b_mag;
      dividend_q <= rs1;
      skip_q     <= skip;
      qneg_q     <= a_neg ^ b_neg;
      rneg_q     <= a_neg;
      rem_q      <= want_rem;
      divzero_q  <= (rs2 == 32'd0);
      iter_left  <= (rs2 == 32'd0) ? 6'd0 : 6'(6'd32 - {1'b0, skip});
    end else if (busy) begin
      r_q       <= r_next;
      q_q       <= {q_q[30:0], ~r_next[32]};
      iter_left <= iter_left - 6'd1;
    end
  end

  assign busy = (iter_left != 6'd0);

  // final correction and sign fix-up
  logic [31:0] r_corr, keep_mask, quo_mag, rem_mag, rest_bits;
  logic [5:0]  nbits;
  always_comb begin
    r_corr    = r_q[32] ? 32'(r_q + $signed({1'b0, d_q})) : r_q[31:0];
    nbits     = 6'(6'd32 - {1'b0, skip_q});
    keep_mask = (skip_q == 5'd0) ? 32'hFFFF_FFFF : ((32'd1 << nbits) - 32'd1);
    // after nbits iterations the untouched dividend bits sit at the top of Q
    rest_bits = (skip_q == 5'd0) ? 32'd0 : (q_q >> nbits);
    quo_mag   = (q_q & keep_mask) << skip_q;
    rem_mag   = (r_corr << skip_q) | rest_bits;
    if (divzero_q)
      result = rem_q ? dividend_q : 32'hFFFF_FFFF;
    else if (rem_q)
      result = rneg_q ? -rem_mag : rem_mag;
    else
      result = qneg_q ? -quo_mag : quo_mag;
  end
endmodule
