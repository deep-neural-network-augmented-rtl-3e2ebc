// tb_float_to_fixed: converts edge cases and random single-precision values
// over the whole exponent range and compares with the real value scaled by
// 2^16, truncated towards zero and saturated to 24 bits.
module tb_float_to_fixed;
  import lsdnn_pkg::*;

  logic [31:0] f;
  fx_t x;
  int checks = 0, failures = 0;

  // Value of a single-precision bit pattern, decoded by hand (finite only).
  function automatic real f2r(input logic [31:0] b);
    real m;
    int  e;
    e = int'(b[30:23]);
    m = real'(b[22:0]) / 8388608.0;
    if (e == 0) m = m * (2.0 ** -126);
    else        m = (1.0 + m) * (2.0 ** (e - 127));
    return b[31] ? -m : m;
  endfunction


  float_to_fixed dut (.f, .x);

  function automatic longint expect_of(input logic [31:0] b);
    real r, s;
    if (b[30:23] == 8'hFF) return (b[22:0] != 0) ? 0 : (b[31] ? -(64'sd1 <<< 23) : (64'sd1 <<< 23) - 1);
    r = f2r(b);
    s = r * 65536.0;
    if (s >= 8388607.0) return (64'sd1 <<< 23) - 1;
    if (s <= -8388608.0) return -(64'sd1 <<< 23);
    return longint'($rtoi(s));          // truncation towards zero
  endfunction

  task automatic check(input logic [31:0] b);
    longint e;
    f = b;
    #1;
    e = expect_of(b);
    checks++;
    if (longint'(x) != e) begin
      failures++;
      $display("FAIL %h -> %0d, expected %0d", b, x, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0000_0000); check(32'h8000_0000);          // +-0
    check(32'h3F80_0000); check(32'hBF80_0000);          // +-1
    check(32'h42FF_FFFF); check(32'h4300_0000);          // just below 128, 128
    check(32'hC300_0000); check(32'hC300_0001);          // -128, just beyond
    check(32'h3780_0000); check(32'h3700_0000);          // 2^-16, 2^-17
    check(32'h7F80_0000); check(32'hFF80_0000);          // +-inf
    check(32'h7FC0_0000); check(32'h0000_0001);          // NaN, subnormal
    for (int i = 0; i < 4000; i++) begin
      logic [31:0] b;
      b = $urandom;
      b[30:23] = 8'(100 + $urandom_range(40));           // 2^-27 .. 2^13
      check(b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
