// cnn_pkg: constants and number format shared by the fully connected layer
// training accelerator.
//
// Model sizes follow the paper's Table 2 (mini-batch of 32, 169 pooled
// features, 128 hidden neurons, 10 classes) and its unroll / partition factor
// of 4.  The Adam hyper-parameters are those of the paper's Table 1.
//
// Number format (this design's choice): the paper does not state its number
// type; it lists 16-bit half floats and fixed point only as possible future
// types, which implies a wider floating-point format.  Here every value is a
// 64-bit two's complement fixed-point number
// with 32 fraction bits (Q32.32): same word width, exact integer arithmetic,
// resolution 2^-32 (so epsilon = 1e-7 is still representable), range +-2^31.
// Constants below are round(x * 2^32).
package cnn_pkg;

  parameter int unsigned BATCHSIZE     = 32;
  parameter int unsigned IMAGEX        = 28;
  parameter int unsigned IMAGEY        = 28;
  parameter int unsigned KERNELX       = 3;
  parameter int unsigned KERNELY       = 3;
  parameter int unsigned POOLMAPLENGTH = 169;
  parameter int unsigned LAYERSIZE     = 128;
  parameter int unsigned CLASSSIZE     = 10;
  parameter int unsigned UNROLL        = 4;

  parameter int unsigned FX_W    = 64;
  parameter int unsigned FX_FRAC = 32;

  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_ONE  = 64'sh0000_0001_0000_0000;
  localparam fx_t FX_MAX  = 64'sh7FFF_FFFF_FFFF_FFFF;
  localparam fx_t FX_MIN  = 64'sh8000_0000_0000_0000;

  // Adam hyper-parameters (Table 1)
  localparam fx_t ADAM_BETA1    = 64'sh0000_0000_E666_6666;  // 0.9
  localparam fx_t ADAM_1MBETA1  = 64'sh0000_0000_1999_999A;  // 0.1
  localparam fx_t ADAM_BETA2    = 64'sh0000_0000_FFBE_76C9;  // 0.999
  localparam fx_t ADAM_1MBETA2  = 64'sh0000_0000_0041_8937;  // 0.001
  localparam fx_t ADAM_ETA      = 64'sh0000_0000_028F_5C29;  // 0.01
  localparam fx_t ADAM_EPS      = 64'sh0000_0000_0000_01AD;  // 1e-7

  localparam fx_t FX_LN2    = 64'sh0000_0000_B172_17F8;      // ln 2
  localparam fx_t FX_INVLN2 = 64'sh0000_0001_7154_7653;      // 1 / ln 2

  // Operations the controller hands to the engines
  typedef enum logic [2:0] {
    PH_IDLE, PH_CLEAR, PH_FC, PH_OUT, PH_SMX, PH_CORR, PH_AW2, PH_AW1
  } phase_e;

  // Index width for a counter over n values (at least one bit)
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Q32.32 product, rounded to nearest (ties towards plus infinity), saturated.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    logic signed [2*FX_W-1:0] s;
    p = a * b;
    s = (p + (128'sd1 <<< (FX_FRAC - 1))) >>> FX_FRAC;
    if (s > 128'(signed'(FX_MAX)))      return FX_MAX;
    else if (s < 128'(signed'(FX_MIN))) return FX_MIN;
    else                                return fx_t'(s);
  endfunction

  // Q32.32 saturating sum
  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    logic signed [FX_W:0] s;
    s = {a[FX_W-1], a} + {b[FX_W-1], b};
    if (s[FX_W] != s[FX_W-1]) return s[FX_W] ? FX_MIN : FX_MAX;
    return s[FX_W-1:0];
  endfunction

  // Q32.32 value of 1/n for an elaboration-time constant n
  function automatic fx_t fx_recip_const(input int unsigned n);
    return fx_t'((64'd1 << FX_FRAC) / 64'(n));
  endfunction

endpackage
