// lsdnn_pkg: word length, sizes, types and fixed-point helpers shared by the
// LSDNN channel estimator.
//
// Every real value in the datapath is a signed fixed-point number FP(W,I):
// W = 24 bits in all, I = 8 integer bits (sign included) and F = W-I = 16
// fractional bits. FP(24,8) is the word length the paper selects for the
// LSDNN datapath. Products are truncated (arithmetic shift, i.e. rounded
// towards minus infinity) back to F fractional bits and every result saturates
// to the W-bit range; both are choices of this design.
//
// A frame has N_SC = 52 active sub-carriers (IEEE 802.11p LTS); the real
// vector fed to the DNN stacks the 52 real parts first and then the 52
// imaginary parts, giving N_RE = 104 values.
//
// Parameter loading: weights, biases and the normalisation statistics are
// written through one write port (struct prm_wr_t), one word per cycle, into
// one of NUM_MODELS model slots.
package lsdnn_pkg;

  parameter int W          = 24;         // word length
  parameter int I          = 8;          // integer bits (with sign)
  parameter int F          = W - I;      // fractional bits
  parameter int N_SC       = 52;         // active sub-carriers of the LTS
  parameter int N_RE       = 2 * N_SC;   // real-valued vector length
  parameter int NUM_MODELS = 4;          // stored models (adaptable design)
  parameter int MODEL_W    = 3;          // model index width (up to 8)
  parameter int IDX_W      = 10;         // PE / word index width

  typedef logic signed [W-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  // Kind of parameter word carried by the write port.
  typedef enum logic [2:0] {
    PRM_WEIGHT   = 3'd0,   // weight of PE 'pe' in layer 'layer', input 'idx'
    PRM_BIAS     = 3'd1,   // bias of PE 'pe' in layer 'layer'
    PRM_IN_MEAN  = 3'd2,   // normalisation mean of DNN input 'idx'
    PRM_IN_STD   = 3'd3,   // normalisation std. deviation of DNN input 'idx'
    PRM_OUT_MEAN = 3'd4,   // de-normalisation mean of DNN output 'idx'
    PRM_OUT_STD  = 3'd5    // de-normalisation std. deviation of output 'idx'
  } prm_kind_e;

  typedef struct packed {
    logic               en;
    prm_kind_e          kind;
    logic [MODEL_W-1:0] model;
    logic [1:0]         layer;
    logic [IDX_W-1:0]   pe;
    logic [IDX_W-1:0]   idx;
    fx_t                data;
  } prm_wr_t;

  localparam fx_t FX_MAX = fx_t'({1'b0, {(W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(W-1){1'b0}}});
  localparam fx_t FX_ONE = fx_t'(1 << F);

  // Saturate a 64-bit signed value to the W-bit range.
  function automatic fx_t fx_sat(input logic signed [63:0] v);
    if (v > 64'(FX_MAX)) return FX_MAX;
    if (v < 64'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  // Fixed-point product, truncated to F fractional bits, saturated.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_sat(p >>> F);
  endfunction

  // Saturating sum and difference.
  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(64'(a) + 64'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(64'(a) - 64'(b));
  endfunction

endpackage
