// tb_ls_estimator: LS estimation of 52 sub-carriers at once. Frames use a
// BPSK reference (+-1, the 802.11p case) or a general complex reference,
// and one frame has a zero reference value to exercise the divider's
// saturation. Every output is compared with an exact complex division
// y/x computed here, and the latency (W = 24 cycles) is checked. A second
// instance with KP = 2 (two preamble symbols summed into y) runs on the same
// inputs and must give y / (2x), with 2x saturated to the FP(24,8) range.
module tb_ls_estimator;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NSC = 52;
  localparam int LAT = 24;   // W cycles from the start cycle to done

  logic clk = 0, rst_n = 0, start = 0, done;
  fx_t y_vec [2*NSC], x_vec [2*NSC], h_vec [2*NSC], h2_vec [2*NSC];
  logic done2;
  int checks = 0, failures = 0;

  ls_estimator #(.NSC(NSC)) dut (.clk, .rst_n, .start, .y_vec, .x_vec, .done, .h_vec);
  ls_estimator #(.NSC(NSC), .KP(2)) dut2 (.clk, .rst_n, .start, .y_vec, .x_vec, .done(done2),
                                          .h_vec(h2_vec));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    longint xr, xi, yr, yi;
    logic signed [127:0] nr, ni, dn;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      for (int k = 0; k < NSC; k++) begin
        if (f % 2 == 0) begin
          xr = ($urandom_range(1) == 1) ? RONE : -RONE;
          xi = 0;
        end else begin
          xr = r_rand((f == 7) ? RMAX : 4 * RONE);   // f7: 2x may saturate
          xi = r_rand((f == 7) ? RMAX : 4 * RONE);
        end
        if (f == 5 && k == 7) begin xr = 0; xi = 0; end
        x_vec[k] = fx_t'(xr); x_vec[NSC + k] = fx_t'(xi);
        y_vec[k] = fx_t'(r_rand(4 * RONE)); y_vec[NSC + k] = fx_t'(r_rand(4 * RONE));
      end
      @(posedge clk);
      start <= 1; @(posedge clk); #1 start <= 0;
      cyc = 0;
      while (!done && cyc < 1000) begin @(posedge clk); #1 cyc++; end
      chk(cyc == LAT, $sformatf("latency %0d, expected %0d", cyc, LAT));
      for (int k = 0; k < NSC; k++) begin
        xr = x_vec[k]; xi = x_vec[NSC + k]; yr = y_vec[k]; yi = y_vec[NSC + k];
        nr = 128'(xr * yr + xi * yi);
        ni = 128'(xr * yi - xi * yr);
        dn = 128'(xr * xr + xi * xi);
        chk(h_vec[k] == fx_t'(r_div(nr, dn)),
            $sformatf("f%0d k%0d re %0d exp %0d", f, k, h_vec[k], r_div(nr, dn)));
        chk(h_vec[NSC + k] == fx_t'(r_div(ni, dn)),
            $sformatf("f%0d k%0d im %0d exp %0d", f, k, h_vec[NSC + k], r_div(ni, dn)));
        // KP = 2: divide by the saturated 2x
        xr = r_sat(2 * xr); xi = r_sat(2 * xi);
        nr = 128'(xr * yr + xi * yi);
        ni = 128'(xr * yi - xi * yr);
        dn = 128'(xr * xr + xi * xi);
        chk(done2 && h2_vec[k] == fx_t'(r_div(nr, dn)) && h2_vec[NSC + k] == fx_t'(r_div(ni, dn)),
            $sformatf("KP=2 f%0d k%0d (%0d,%0d) exp (%0d,%0d)", f, k, h2_vec[k], h2_vec[NSC + k],
                      r_div(nr, dn), r_div(ni, dn)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
