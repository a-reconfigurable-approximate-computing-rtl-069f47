// mul32_hier: 32x32 unsigned multiplier made of four 16-bit iterative units.
//
// The paper builds its 32-bit multiplier from the 8-bit one: each 16x16
// product comes from one 8-bit multiplier used over several cycles, and that
// hardware is replicated four times for the 32-bit product.  Here the four
// mul16_iter instances compute AL*BL, AH*BL, AL*BH and AH*BH of the 16-bit
// halves in parallel, and the 64-bit product is their shifted sum.
//
// Timing: start sampled on a rising edge; busy high for the next four cycles;
// product valid from the cycle busy falls until the next start.
module mul32_hier (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        approx,
  input  logic [7:0]  err,
  output logic        busy,
  output logic [63:0] product
);
  logic [31:0] p [4];
  logic [3:0]  bsy;

  for (genvar k = 0; k < 4; k++) begin : g_m16
    mul16_iter u_m16 (
      .clk, .rst_n, .start,
      .a      (k[0] ? a[31:16] : a[15:0]),
      .b      (k[1] ? b[31:16] : b[15:0]),
      .approx, .err,
      .busy   (bsy[k]),
      .product(p[k])
    );
  end

  assign busy    = |bsy;
  assign product = {32'b0, p[0]} + ({32'b0, p[1]} << 16) + ({32'b0, p[2]} << 16)
                 + {p[3], 32'b0};
endmodule
