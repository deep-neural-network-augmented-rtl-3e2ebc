// tb_fixed_to_float: converts edge cases and random FP(24,8) values to
// single precision and checks that the float holds exactly the value
// x / 2^16, with +0 for zero.
module tb_fixed_to_float;
  import lsdnn_pkg::*;

  fx_t x;
  logic [31:0] f;
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


  fixed_to_float dut (.x, .f);

  task automatic check(input fx_t v);
    real e;
    x = v;
    #1;
    e = real'(longint'(v)) / 65536.0;
    checks++;
    if (f2r(f) != e || (v == 0 && f != 32'h0)) begin
      failures++;
      $display("FAIL %0d -> %h, expected %f", v, f, e);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(1); check(-1); check(FX_MAX); check(FX_MIN); check(FX_ONE); check(-FX_ONE);
    for (int b = 0; b < W; b++) check(fx_t'(1 << b));
    for (int i = 0; i < 4000; i++) check(fx_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
