// tb_ref_pkg: reference arithmetic for the testbenches, written apart from
// the RTL. Values are FP(24,8) integers (16 fractional bits); products are
// floored to 16 fractional bits, sums and products saturate to 24 bits, and
// a division is the exact quotient truncated towards zero, saturated, with
// x/0 = +-max and 0/0 = 0.
package tb_ref_pkg;

  localparam longint RMAX = (64'sd1 <<< 23) - 1;
  localparam longint RMIN = -(64'sd1 <<< 23);
  localparam longint RONE = 64'sd1 <<< 16;

  function automatic longint r_sat(input longint v);
    return (v > RMAX) ? RMAX : (v < RMIN) ? RMIN : v;
  endfunction

  function automatic longint r_mul(input longint a, input longint b);
    longint p;
    p = a * b;
    // floor(p / 2^16)
    if (p >= 0) return r_sat(p / 65536);
    return r_sat(-((-p + 65535) / 65536));
  endfunction

  function automatic longint r_add(input longint a, input longint b);
    return r_sat(a + b);
  endfunction

  function automatic longint r_div(input logic signed [127:0] num,
                                   input logic signed [127:0] den);
    logic signed [127:0] q, an, ad;
    bit neg;
    if (num == 0) return 0;
    neg = (num < 0) != (den < 0);
    if (den == 0) return neg ? RMIN : RMAX;
    an = (num < 0) ? -num : num;
    ad = (den < 0) ? -den : den;
    q  = (an * 65536) / ad;
    if (q > 128'(RMAX)) return neg ? RMIN : RMAX;
    return neg ? -longint'(q) : longint'(q);
  endfunction

  // Uniform random value in [-lim, lim] (lim in FP units).
  function automatic longint r_rand(input longint lim);
    return longint'($urandom_range(32'(2 * lim))) - lim;
  endfunction

  // One fully connected layer: y[j] = f(b[j] + sum_i w[j][i]*x[i]),
  // accumulated in the order i = 0, 1, ... with saturation at every step.
  function automatic void r_dense(input longint x[], input longint w[][],
                                  input longint b[], input bit relu,
                                  output longint y[]);
    y = new[b.size()];
    foreach (y[j]) begin
      longint acc = 0;
      foreach (x[i]) acc = r_add(acc, r_mul(x[i], w[j][i]));
      acc = r_add(acc, b[j]);
      y[j] = (relu && acc <= 0) ? 0 : acc;
    end
  endfunction

  // Single-precision bit pattern of the fixed-point value v / 2^16, built by
  // hand (exact for |v| < 2^24).
  function automatic logic [31:0] r_f32(input longint v);
    longint m;
    int     p;
    if (v == 0) return 32'h0;
    m = (v < 0) ? -v : v;
    p = 0;
    for (int b = 0; b < 40; b++) if (m[b]) p = b;
    return {v < 0, 8'(127 + p - 16), 23'((m << (23 - p)) & 64'h7F_FFFF)};
  endfunction

  // Value of a finite single-precision bit pattern, decoded by hand.
  function automatic real r_f2r(input logic [31:0] b);
    real m;
    int  e;
    e = int'(b[30:23]);
    m = real'(b[22:0]) / 8388608.0;
    if (e == 0) m = m * (2.0 ** -126);
    else        m = (1.0 + m) * (2.0 ** (e - 127));
    return b[31] ? -m : m;
  endfunction

endpackage
