// approx_csa32: the default accuracy-controllable 32-bit adder/subtractor.
//
// A carry-select adder of eight 4-bit blocks (block k covers bits 4k+3:4k).
// Block 0 adds with the real carry in; every other block computes its sum for
// carry-in 0 and carry-in 1 in parallel and a multiplexer picks one with the
// carry out of the block below, as in any carry-select adder (paper, adder
// subsection).  Subtraction is a + ~b + 1.
//
// Error control: err[k] = 1 makes block k exact.  Only the four low blocks
// (bits 15:0) can be approximate; a block whose err bit is 0 uses the
// approximate ripple-carry block (see approx_rca4).  So err = 0x0F, or
// approx = 0, gives exact addition, matching the paper's statement that the
// adder is accurate when its error field is 0x0F or approximation is off.  The
// paper speaks of an 8-bit error field and 64 configurations; which blocks the
// bits steer is not given, and the mapping above is this design's choice.
// Purely combinational.
module approx_csa32 (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        sub,
  input  logic        approx,
  input  logic [7:0]  err,
  output logic [31:0] sum
);
  localparam int NBLK = 8;

  logic [31:0]     b_eff;
  logic [NBLK-1:0] blk_apx;
  logic [NBLK:0]   carry;
  logic [3:0]      s0 [NBLK];
  logic [3:0]      s1 [NBLK];
  logic [NBLK-1:0] c0, c1;

  assign b_eff = sub ? ~b : b;

  always_comb begin
    for (int k = 0; k < NBLK; k++) begin
      blk_apx[k] = (k < 4) ? (approx & ~err[k]) : 1'b0;
    end
  end

  for (genvar k = 0; k < NBLK; k++) begin : g_blk
    approx_rca4 u_c0 (.a(a[4*k +: 4]), .b(b_eff[4*k +: 4]), .cin(1'b0),
                      .approx(blk_apx[k]), .sum(s0[k]), .cout(c0[k]));
    approx_rca4 u_c1 (.a(a[4*k +: 4]), .b(b_eff[4*k +: 4]), .cin(1'b1),
                      .approx(blk_apx[k]), .sum(s1[k]), .cout(c1[k]));
  end

  assign carry[0] = sub;
  for (genvar k = 0; k < NBLK; k++) begin : g_sel
    assign sum[4*k +: 4] = carry[k] ? s1[k] : s0[k];
    assign carry[k+1]    = carry[k] ? c1[k] : c0[k];
  end
endmodule
