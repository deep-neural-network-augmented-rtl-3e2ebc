// fixed_to_float: converts an FP(24,8) value to IEEE 754 single precision.
//
// Every FP(24,8) value has at most 24 significant bits, so the conversion is
// exact. The magnitude is normalised by its leading one at bit position p;
// the exponent is 127 + p - F and the 23 bits below the leading one form the
// fraction. Zero gives +0. Purely combinational. The paper names this
// conversion as part of its IP but does not describe it. Written for W <= 24
// (the fraction field takes the W-1 bits below the leading one).
module fixed_to_float
  import lsdnn_pkg::*;
(
  input  fx_t         x,
  output logic [31:0] f
);

  logic [W-1:0] mag;
  logic [W-1:0] norm;
  int           p;

  always_comb begin
    mag = x[W-1] ? W'(-x) : W'(x);
    p   = 0;
    for (int b = 0; b < W; b++)
      if (mag[b]) p = b;
    norm = mag << (W - 1 - p);
    if (mag == '0)
      f = '0;
    else
      f = {x[W-1], 8'(127 + p - F), 23'({norm[W-2:0], 23'(0)} >> (W - 1))};
  end

endmodule
