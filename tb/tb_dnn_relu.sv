// tb_dnn_relu: checks the ReLU on edge values and random values.
module tb_dnn_relu;
  import lsdnn_pkg::*;

  fx_t x, y;
  int checks = 0, failures = 0;

  dnn_relu dut (.x, .y);

  task automatic check(input fx_t v);
    fx_t exp_y;
    x = v;
    #1;
    exp_y = (v[W-1] == 1'b0 && v != 0) ? v : fx_t'(0);
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL relu(%0d) = %0d, expected %0d", v, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(1); check(-1); check(FX_MAX); check(FX_MIN);
    for (int i = 0; i < 500; i++) check(fx_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
