// approx_rca4: 4-bit ripple-carry adder block with an error-control input.
//
// This is the building block of the default carry-select adder.  With
// approx = 0 it is an exact 4-bit ripple-carry adder.  With approx = 1 the carry
// chain is cut: each sum bit becomes a OR b and the carry out is a[3] AND b[3],
// and the carry in is ignored (a lower-part-OR style block).  The paper says
// only that the carry-select adder is built from error-controllable 4-bit
// ripple-carry adders; the OR-based approximation is this design's choice.
// Purely combinational.
module approx_rca4 (
  input  logic [3:0] a,
  input  logic [3:0] b,
  input  logic       cin,
  input  logic       approx,
  output logic [3:0] sum,
  output logic       cout
);
  logic [4:0] c;

  assign c[0] = cin;
  for (genvar i = 0; i < 4; i++) begin : g_fa
    assign c[i+1] = (a[i] & b[i]) | (c[i] & (a[i] ^ b[i]));
  end

  always_comb begin
    if (approx) begin
      sum  = a | b;
      cout = a[3] & b[3];
    end else begin
      sum  = a ^ b ^ c[3:0];
      cout = c[4];
    end
  end
endmodule
