// tb_dnn_layer: a hidden layer of the default network (104 inputs, 52 PEs,
// ReLU) with two model slots loaded through the parameter port. Checks every
// output against a reference dense layer, the NIN+1 = 105 cycle latency, that
// words addressed to another layer are ignored, and that ReLU clipped some
// outputs to zero.
module tb_dnn_layer;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NIN = 104, NOUT = 52;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [MODEL_W-1:0] model_sel = '0;
  prm_wr_t prm = '0;
  fx_t x [NIN], y [NOUT];
  longint w [2][][], b [2][], xr [], yr [];
  int checks = 0, failures = 0, clipped = 0;

  dnn_layer #(.NIN(NIN), .NOUT(NOUT), .RELU(1'b1), .LAYER_ID(1), .NMODELS(4)) dut (
    .clk, .rst_n, .start, .model_sel, .prm, .x, .y, .busy, .done);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input prm_kind_e kind, input int layer, input int model,
                    input int pe, input int idx, input longint d);
    @(negedge clk);
    prm = '{en: 1'b1, kind: kind, model: MODEL_W'(model), layer: 2'(layer),
            pe: IDX_W'(pe), idx: IDX_W'(idx), data: fx_t'(d)};
    @(posedge clk);
    #1 prm = '0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      w[s] = new[NOUT];
      b[s] = new[NOUT];
      for (int j = 0; j < NOUT; j++) begin
        w[s][j] = new[NIN];
        for (int i = 0; i < NIN; i++) begin
          w[s][j][i] = r_rand(RONE / 4);
          wr(PRM_WEIGHT, 1, s, j, i, w[s][j][i]);
          // same address, other layer: must be ignored
          if (i == 0) wr(PRM_WEIGHT, 0, s, j, i, 999);
        end
        b[s][j] = r_rand(RONE / 2);
        wr(PRM_BIAS, 1, s, j, 0, b[s][j]);
        if (j == 0) wr(PRM_BIAS, 2, s, j, 0, 777);
      end
    end
    for (int f = 0; f < 4; f++) begin
      @(negedge clk);
      model_sel = MODEL_W'(f % 2);
      xr = new[NIN];
      for (int i = 0; i < NIN; i++) begin xr[i] = r_rand(2 * RONE); x[i] = fx_t'(xr[i]); end
      start = 1;
      @(posedge clk); #1 start = 0;
      cyc = 0;
      do begin @(posedge clk); #1 cyc++; end while (!done && cyc < 1000);
      chk(cyc == NIN + 1, $sformatf("layer took %0d cycles", cyc));
      r_dense(xr, w[f % 2], b[f % 2], 1'b1, yr);
      for (int j = 0; j < NOUT; j++) begin
        chk(y[j] == fx_t'(yr[j]), $sformatf("f%0d y[%0d]=%0d exp %0d", f, j, y[j], yr[j]));
        if (yr[j] == 0) clipped++;
      end
      @(posedge clk); #1 chk(!busy, "idle after done");
    end
    chk(clipped > 0, "ReLU never clipped");
    $display("ReLU clipped %0d outputs", clipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
