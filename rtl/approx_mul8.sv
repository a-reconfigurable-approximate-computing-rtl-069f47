// approx_mul8: the default error-configurable 8x8 unsigned multiplier.
//
// The 64 partial-product bits a[j]&b[i] fall into columns c = i+j (0..14).
// An exact column adds its bits with full carry propagation; an approximate
// column keeps only the OR of its bits and produces no carry.  Because the
// approximate columns are the low ones, the product is the exact sum of the
// bits in exact columns plus the OR bits of the approximate columns.
//
// Column selection (approx = 1): columns 0 and 1 are always approximate,
// column c in 2..7 is exact when err[c-1] is 1, columns 8..14 are always
// exact.  With the paper's error-control codes 0x00, 0x40, 0x60, 0x70, 0x78,
// 0x7C, 0x7E (error levels 0..6) each higher level turns one more column,
// from column 7 downwards, into an exact one.  approx = 0 gives the exact
// product.  The paper gives the codes and that level 6 is the most accurate
// and level 0 the least; the column-OR approximation itself is this design's
// choice, so its error figures are not the paper's.  Combinational.
module approx_mul8 (
  input  logic [7:0]  a,
  input  logic [7:0]  b,
  input  logic        approx,
  input  logic [7:0]  err,
  output logic [15:0] p
);
  logic [14:0] col_exact;
  logic [14:0] col_or;
  logic [15:0] exact_sum;

  always_comb begin
    for (int c = 0; c < 15; c++) begin
      if (!approx)     col_exact[c] = 1'b1;
      else if (c < 2)  col_exact[c] = 1'b0;
      else if (c < 8)  col_exact[c] = err[c-1];
      else             col_exact[c] = 1'b1;
    end
  end

  always_comb begin
    exact_sum = '0;
    col_or    = '0;
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) begin
        if (col_exact[i+j]) exact_sum = exact_sum + (16'(a[j] & b[i]) << (i + j));
        else                col_or[i+j] = col_or[i+j] | (a[j] & b[i]);
      end
    end
    p = exact_sum + {1'b0, col_or};
  end
endmodule
