// ubimoe_pkg: number formats and shared helpers of the MoE-ViT accelerator.
//
// Data follow the W16A32 format of the evaluated design: activations (Q, K,
// V, patch vectors, scores) are 32-bit signed fixed point with 16 fraction
// bits (Q16.16); weights are 16-bit signed with 12 fraction bits (Q4.12).
// The bit widths come from the source design, the fraction-bit positions
// are this design's choice. Exponentials are 17-bit unsigned Q1.16 in (0,1].
//
// Two small tables live here:
//  * EXP2_TAB[i] = round(2^(-i/256) * 2^16), i = 0..255, built at elaboration
//    by repeated multiplication with round(2^(-1/256) * 2^32) = 4283353945.
//  * GELU_TAB[i] = round(GELU(-4 + i/2) * 2^16), i = 0..16, with
//    GELU(x) = x/2 * (1 + erf(x/sqrt(2))), knots of a piecewise-linear GELU.
package ubimoe_pkg;

  localparam int unsigned ACT_W    = 32;
  localparam int unsigned ACT_FRAC = 16;
  localparam int unsigned WGT_W    = 16;
  localparam int unsigned WGT_FRAC = 12;
  localparam int unsigned EXP_W    = 17;   // Q1.16, 1.0 = 65536

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic        [EXP_W-1:0] expv_t;

  // Saturate a wide signed value to a 32-bit activation.
  function automatic act_t sat_act(input logic signed [95:0] v);
    if (v > 96'sh7FFF_FFFF)       return 32'sh7FFF_FFFF;
    else if (v < -96'sh8000_0000) return 32'sh8000_0000;
    else                          return v[31:0];
  endfunction

  typedef logic [EXP_W-1:0] exp_tab_t [256];

  function automatic exp_tab_t build_exp2_tab();
    exp_tab_t t;
    logic [95:0] acc;                 // running power of 2^(-1/256), 32 fraction bits
    acc = 96'h1_0000_0000;
    for (int i = 0; i < 256; i++) begin
      t[i] = EXP_W'((acc + 96'h8000) >> 16);
      acc  = (acc * 96'd4283353945 + 96'h8000_0000) >> 32;
    end
    return t;
  endfunction

  localparam exp_tab_t EXP2_TAB = build_exp2_tab();

  // log2(e) in Q16.16
  localparam logic [31:0] LOG2E_Q16 = 32'd94548;

  typedef logic signed [ACT_W-1:0] gelu_tab_t [17];
  localparam gelu_tab_t GELU_TAB = '{
    -32'sd8,     -32'sd53,    -32'sd265,   -32'sd1017,  -32'sd2982,
    -32'sd6567,  -32'sd10398, -32'sd10110,  32'sd0,      32'sd22658,
     32'sd55138,  32'sd91737,  32'sd128090, 32'sd162823, 32'sd196343,
     32'sd229323, 32'sd262136 };

  // Output activation of a linear-kernel pass.
  typedef enum logic [0:0] { ACT_NONE = 1'b0, ACT_GELU = 1'b1 } act_fn_e;

endpackage
