// poly_stage: second stage of the BF16 exponential, the mantissa correction
// P(x). It replaces the 7-bit fraction f (in [0,1), 7 fraction bits) left by
// the Schraudolph stage with an estimate of 2^f - 1, so that
// 1 + P(f) follows 2^f rather than the straight line 1 + f.
//
// How it works: the interval is split by the fraction's MSB f[6].
//   f[6] = 0 (f < 0.5):  P = alpha * f * (f + gamma1)
//   f[6] = 1 (f >= 0.5): P = not(beta * not(f) * (f + gamma2))
// not() is the bitwise complement, which stands for 1 - value. A multiplexer
// picks gamma1/gamma2, which is added to f[6:0]; a second picks f[5:0] or its
// complement, which is multiplied by alpha/beta; the two are multiplied and
// the product, truncated to 7 fraction bits, is complemented for the upper
// branch. With f[6] = 1, not(f) over 7 bits equals ~f[5:0] zero-extended,
// which is why only six bits take that path.
//
// Follows the paper: both branches, the four coefficient values, the use of
// f[6] as selector, f[6:0] in the adder and f[5:0] in the scaling multiplier.
// This design's own choices: the fixed-point formats (coefficients with 5,
// gammas with 6 fraction bits, which represent them exactly) and truncation
// of the product.
//
// Interface: frac_i (7 bits), p_o (7 bits). Purely combinational.
module poly_stage
  import vexp_pkg::*;
(
  input  logic [6:0] frac_i,
  output logic [6:0] p_o
);

  localparam int unsigned SUM_W  = 10;                         // Q3.7
  localparam int unsigned PROD_W = 6 + 4 + SUM_W;              // Q.(7+5+7)
  localparam int unsigned DROP   = COEF_FRAC + BF16_MAN_W;     // to Q0.7

  logic               upper;
  logic [7:0]         gamma;
  logic [SUM_W-1:0]   sum;
  logic [5:0]         lin;
  logic [3:0]         coef;
  logic [9:0]         scaled;
  logic [PROD_W-1:0]  prod;
  logic [6:0]         p_raw;

  always_comb begin
    upper  = frac_i[6];
    gamma  = upper ? GAMMA2_FX : GAMMA1_FX;
    // gamma has 6 fraction bits, frac_i has 7: align gamma by one bit
    sum    = SUM_W'(frac_i) + (SUM_W'(gamma) << (BF16_MAN_W - GAMMA_FRAC));
    lin    = upper ? ~frac_i[5:0] : frac_i[5:0];
    coef   = upper ? BETA_FX : ALPHA_FX;
    scaled = 10'(lin) * 10'(coef);
    prod   = PROD_W'(scaled) * PROD_W'(sum);
    p_raw  = prod[DROP +: 7];
    p_o    = upper ? ~p_raw : p_raw;
  end

endmodule
