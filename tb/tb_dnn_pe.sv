// tb_dnn_pe: loads weights and a bias for three model slots into one PE
// (104 inputs), runs it on random inputs with each slot, and checks
// y = b + sum w[i]*x[i] (floored products, saturating sums, evaluated in the
// order i = 0..103), the NPREV+1 = 105 cycle pass, the single y_valid pulse
// and that y holds afterwards. One pass uses large values so the
// accumulator saturates.
module tb_dnn_pe;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NPREV = 104;

  logic clk = 0, rst_n = 0, pe_en = 0, w_we = 0, b_we = 0, y_valid;
  logic [MODEL_W-1:0] model_sel = '0, wr_model = '0;
  logic [IDX_W-1:0] wr_idx = '0;
  fx_t wr_data = '0, y;
  fx_t x [NPREV];
  longint w [3][NPREV], b [3];
  int checks = 0, failures = 0;

  dnn_pe #(.NPREV(NPREV), .NMODELS(4)) dut (.clk, .rst_n, .pe_en, .model_sel, .x, .w_we, .b_we,
                                            .wr_model, .wr_idx, .wr_data, .y, .y_valid);

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
    longint acc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++) begin
      for (int i = 0; i < NPREV; i++) begin
        w[s][i] = r_rand(s == 2 ? RMAX : RONE / 2);
        @(negedge clk);
        w_we = 1; wr_model = MODEL_W'(s); wr_idx = IDX_W'(i); wr_data = fx_t'(w[s][i]);
      end
      b[s] = r_rand(RONE);
      @(negedge clk);
      w_we = 0; b_we = 1; wr_data = fx_t'(b[s]);
      @(negedge clk);
      b_we = 0;
    end
    for (int f = 0; f < 6; f++) begin
      @(negedge clk);
      model_sel = MODEL_W'(f % 3);
      for (int i = 0; i < NPREV; i++) x[i] = fx_t'(r_rand((f % 3) == 2 ? RMAX : 2 * RONE));
      pe_en = 1;
      cyc = 0;
      do begin @(posedge clk); #1 cyc++; end while (!y_valid && cyc < 1000);
      chk(cyc == NPREV + 1, $sformatf("pass took %0d cycles", cyc));
      @(negedge clk) pe_en = 0;
      acc = 0;
      for (int i = 0; i < NPREV; i++) acc = r_add(acc, r_mul(x[i], w[f % 3][i]));
      acc = r_add(acc, b[f % 3]);
      chk(y == fx_t'(acc), $sformatf("f%0d y=%0d exp %0d", f, y, acc));
      repeat (3) @(posedge clk);
      #1 chk(!y_valid && y == fx_t'(acc), "y holds, single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
