// float_to_fixed: converts an IEEE 754 single-precision number to FP(24,8).
//
// The estimator's datapath is fixed point, while the samples at its boundary
// are 32-bit floats (64-bit complex words). The value 1.m * 2^(e-127) is
// scaled by 2^F: the 24-bit significand is shifted left by e-150+F or right
// by 150-F-e, the right shift truncating the magnitude (towards zero). A
// magnitude beyond the FP(24,8) range saturates; zeros and subnormals give 0,
// infinities saturate with their sign and NaN gives 0. Purely combinational.
// The paper names this conversion as part of its IP but does not describe it;
// the rounding and the special cases are this design's.
module float_to_fixed
  import lsdnn_pkg::*;
(
  input  logic [31:0] f,
  output fx_t         x
);

  logic        sgn;
  logic [7:0]  e;
  logic [23:0] sig;
  logic [23:0] mag;      // result magnitude, up to 2^23
  logic        big;
  int          sh;

  always_comb begin
    sgn = f[31];
    e   = f[30:23];
    sig = {1'b1, f[22:0]};
    sh  = int'(e) - 150 + F;           // value * 2^F = sig * 2^sh
    big = 1'b0;
    mag = '0;
    if (e == 8'd0 || (e == 8'hFF && f[22:0] != '0)) begin
      mag = '0;                        // zero, subnormal, NaN
    end else if (e == 8'hFF || sh > 0) begin
      big = 1'b1;                      // sig >= 2^23, so any left shift overflows
    end else if (sh > -24) begin
      mag = sig >> (-sh);
    end
    if (big || (mag > 24'h7FFFFF && !(sgn && mag == 24'h800000)))
      x = sgn ? FX_MIN : FX_MAX;
    else
      x = sgn ? -fx_t'(mag) : fx_t'(mag);
  end

endmodule
