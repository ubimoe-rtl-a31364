// gelu_unit: piecewise-linear GELU, applied by the linear kernel between
// the two linear layers of an expert ("compute between linear").
//
// x is Q16.16. For -4 <= x < 4 the result interpolates linearly between the
// 17 knots GELU_TAB (spacing 0.5); x >= 4 returns x and x < -4 returns 0.
// Combinational. The source design names GELU and draws a curve made of
// linear pieces; knot spacing and range are this design's choice.
// Lint: only the segment and fraction bits of the shifted input are used;
// the top bits of u are covered by the range checks.
module gelu_unit
  import ubimoe_pkg::*;
(
  input  act_t x,
  output act_t y
);
  logic signed [31:0] u;          // x + 4.0
  logic [3:0]         seg;
  logic [14:0]        frac;       // position inside the 0.5-wide segment
  logic signed [63:0] dy, prod;

  always_comb begin
    u    = x + 32'sd262144;
    seg  = u[18:15];
    frac = u[14:0];
    dy   = 64'(GELU_TAB[5'(seg) + 5'd1]) - 64'(GELU_TAB[5'(seg)]);
    prod = dy * $signed({49'd0, frac});
    if (x >= 32'sd262144)       y = x;
    else if (x < -32'sd262144)  y = '0;
    else                        y = GELU_TAB[5'(seg)] + act_t'(prod >>> 15);
  end
endmodule
