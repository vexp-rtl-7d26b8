// vexp_pkg: types and constants shared by the BF16 exponential (EXP) datapath,
// its SIMD operation group, the extended FPU and the FP subsystem.
//
// BF16 layout is sign[15] | exponent[14:7] | fraction[6:0], bias 127.
// EXP_OVF = 133 is the smallest biased input exponent for which exp(x)
// always overflows (|x| >= 64); inputs at or above it return +inf or +0.
// The polynomial coefficients are the four constants of the mantissa
// correction P(x), all exactly representable: alpha = 7/32, beta = 14/32
// (five fractional bits) and gamma1 = 211/64, gamma2 = 139/64 (six
// fractional bits). The FEXP/VFEXP encodings follow the published table:
// both are OP-FP (1010011) with rs2 = 00000 and funct3 = 000; funct7 is
// 0011111 for the scalar and 1011111 for the packed-SIMD form, so
// instr[31] alone selects the vector form.
package vexp_pkg;

  localparam int unsigned BF16_MAN_W = 7;
  localparam int unsigned BF16_BIAS  = 127;
  localparam int unsigned EXP_OVF    = 133;

  localparam logic [15:0] BF16_PINF  = 16'h7F80;
  localparam logic [15:0] BF16_ZERO  = 16'h0000;
  localparam logic [15:0] BF16_ONE   = 16'h3F80;

  // P(x) coefficients in fixed point
  localparam int unsigned COEF_FRAC  = 5;        // alpha, beta
  localparam int unsigned GAMMA_FRAC = 6;        // gamma1, gamma2
  localparam logic [3:0]  ALPHA_FX   = 4'd7;     // 0.21875  = 7/32
  localparam logic [3:0]  BETA_FX    = 4'd14;    // 0.4375   = 14/32
  localparam logic [7:0]  GAMMA1_FX  = 8'd211;   // 3.296875 = 211/64
  localparam logic [7:0]  GAMMA2_FX  = 8'd139;   // 2.171875 = 139/64

  // Instruction encodings (OP-FP major opcode)
  localparam logic [6:0] OPC_OP_FP     = 7'b1010011;
  localparam logic [6:0] F7_FEXP       = 7'b0011111;
  localparam logic [6:0] F7_VFEXP      = 7'b1011111;

  // Operation groups of the extended FPU: the EXP group is built here, all
  // other groups (FMA, DIVSQRT, COMP, CAST, SDOTP) sit behind one port.
  typedef enum logic [0:0] {
    OPGRP_EXT = 1'b0,
    OPGRP_EXP = 1'b1
  } opgroup_e;

  localparam int unsigned NUM_FP_REGS = 32;
  localparam int unsigned FLEN        = 64;
  localparam int unsigned REG_AW      = 5;

  typedef logic [FLEN-1:0]   fp_word_t;
  typedef logic [REG_AW-1:0] fp_reg_t;

endpackage
