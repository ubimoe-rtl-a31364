// exp_unit: fixed-point exponential of a non-positive argument, the "exp"
// step of the safe softmax (exp(x_i - m(x)), Eq. 1 of the method).
//
// The argument d = x - m <= 0 is Q16.16. The unit rewrites e^d as 2^(-t)
// with t = -d * log2(e), splits t into an integer part n and an 8-bit
// fraction f, looks 2^(-f/256) up in EXP2_TAB and shifts it right by n.
// The result is Q1.16 in (0, 1]; arguments below about -11.8 give 0.
// Purely combinational. Positive arguments (never produced by the safe
// softmax) are treated as 0 and give 1.0.
// Only the existence of an exponential unit with its own table memory is
// from the source design; the base-2 table method and its size are this
// design's choice.
module exp_unit
  import ubimoe_pkg::*;
(
  input  act_t  d,       // Q16.16, expected <= 0
  output expv_t e        // Q1.16
);
  logic [31:0] mag;
  logic [63:0] t;        // |d| * log2(e), 32 fraction bits
  logic [31:0] n;
  logic [7:0]  f;

  always_comb begin
    mag = (d[31]) ? 32'(-d) : 32'd0;
    t   = 64'(mag) * 64'(LOG2E_Q16);
    n   = t[63:32];
    f   = t[31:24];
    if (n >= 32'd17) e = '0;
    else             e = EXP2_TAB[f] >> n[4:0];
  end
endmodule
