// exps_stage: first stage of the BF16 exponential, a hardware form of
// Schraudolph's method. It turns x into the bit pattern of
// 2^int(x') * (1 + frac(x')), x' = x * log2(e), purely combinationally.
//
// How it works: the 8-bit significand 1.x[6:0] is multiplied by a fixed-point
// log2(e) (LOG2E_FRAC fractional bits). The product is aligned so that its
// binary point is at bit LOG2E_FRAC of a word that holds x' with 7 fraction
// bits: it is placed at weight 2^6 and shifted right by EXP_OVF - x[14:7]
// (133 - exponent), which equals a left shift by exponent - 127. The 15 bits
// above the dropped fraction bits are taken and rounded half-up on the first
// dropped bit; that is x' in Q8.7. For a negative argument the 15-bit value is
// bitwise inverted (one's complement, i.e. -x' less one LSB). Adding
// BIAS << 7 modulo 2^15 and prefixing a 0 sign bit gives the result, whose
// upper bits are the exponent and whose low 7 bits are frac(x').
// Special cases: exponent >= 133 (|x| >= 64, also inf and NaN) returns +inf
// for positive and +0 for negative x; a zero exponent (zero or subnormal) is
// flushed to zero, so the result is exp(0) = 1.0.
//
// Follows the paper: the 1||x[6:0] * log2e product, the 133 - exponent shift,
// 15-bit selection and rounding, the sign-selected
// bitwise inversion (read from an unlabelled element of the figure), the BIAS << 7
// adder, the overflow and flush-to-zero rules. This design's own choices: the
// width of log2(e) (14 fraction bits), round-half-up, the right-shift form of
// the alignment, and that NaN inputs take the overflow path.
//
// Interface: x_i (BF16), exps_o (BF16 bit pattern). Purely combinational.
module exps_stage
  import vexp_pkg::*;
#(
  parameter int unsigned LOG2E_FRAC = 14
) (
  input  logic [15:0] x_i,
  output logic [15:0] exps_o
);

  // log2(e) = 1.4426950408889634, rounded to LOG2E_FRAC fraction bits
  localparam int unsigned LOG2E_W = LOG2E_FRAC + 1;
  localparam real         LOG2E_R = 1.4426950408889634;
  localparam logic [LOG2E_W-1:0] LOG2E_FX =
      LOG2E_W'($rtoi(LOG2E_R * (2.0 ** LOG2E_FRAC) + 0.5));

  localparam int unsigned PROD_W  = 8 + LOG2E_W;      // 1.7 x 1.F -> 2.(7+F)
  localparam int unsigned ALIGN_W = PROD_W + 6;       // product placed at 2^6

  logic                 sign;
  logic [7:0]           expo;
  logic [7:0]           mant;
  logic [PROD_W-1:0]    prod;
  logic [ALIGN_W-1:0]   aligned;
  logic [7:0]           shamt;
  logic [14:0]          fx_trunc;
  logic                 round_bit;
  logic [14:0]          fx_round;
  logic [14:0]          fx_signed;
  logic [14:0]          biased;

  always_comb begin
    sign      = x_i[15];
    expo      = x_i[14:7];
    mant      = {1'b1, x_i[6:0]};
    prod      = PROD_W'(mant) * PROD_W'(LOG2E_FX);
    // expo < 133 here whenever the result is used, so 1 <= shamt <= 133
    shamt     = 8'(EXP_OVF) - expo;
    aligned   = {prod, 6'b0} >> shamt;
    fx_trunc  = aligned[LOG2E_FRAC +: 15];
    round_bit = aligned[LOG2E_FRAC-1];
    fx_round  = fx_trunc + 15'(round_bit);
    fx_signed = sign ? ~fx_round : fx_round;
    biased    = fx_signed + 15'(BF16_BIAS << BF16_MAN_W);

    if (expo >= 8'(EXP_OVF)) begin
      exps_o = sign ? BF16_ZERO : BF16_PINF;
    end else if (expo == 8'd0) begin
      exps_o = BF16_ONE;
    end else begin
      exps_o = {1'b0, biased};
    end
  end

endmodule
