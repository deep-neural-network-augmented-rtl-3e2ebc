// tb_dnn: the two networks of the paper side by side, the default LSDNN1
// (104-52-104, one ReLU hidden layer) and LSDNN2 (104-104-104-104, two
// hidden layers). Random weights are loaded through the parameter port, the
// networks are run on random inputs, and every output is compared with a
// reference forward pass. Latency is checked against
// NIN + 1 + NHL*(NHID+2): 159 cycles for LSDNN1, 317 for LSDNN2 (one
// cycle per layer hand-over).
module tb_dnn;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NIN = 104, NOUT = 104;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy1, done1, busy2, done2;
  logic [MODEL_W-1:0] model_sel = '0;
  prm_wr_t prm1 = '0, prm2 = '0;
  fx_t x [NIN], y1 [NOUT], y2 [NOUT];
  int checks = 0, failures = 0;

  // weights per network: [layer][pe][input]
  longint w1 [2][][], b1 [2][], w2 [3][][], b2 [3][];

  dnn dut1 (.clk, .rst_n, .start, .model_sel, .prm(prm1), .x, .y(y1), .busy(busy1), .done(done1));
  dnn #(.NHID(104), .NHL(2)) dut2 (.clk, .rst_n, .start, .model_sel, .prm(prm2), .x, .y(y2),
                                   .busy(busy2), .done(done2));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input int net, input prm_kind_e kind, input int layer, input int pe,
                    input int idx, input longint d);
    prm_wr_t p;
    p = '{en: 1'b1, kind: kind, model: '0, layer: 2'(layer), pe: IDX_W'(pe),
          idx: IDX_W'(idx), data: fx_t'(d)};
    @(negedge clk);
    if (net == 1) prm1 = p; else prm2 = p;
    @(posedge clk);
    #1 prm1 = '0; prm2 = '0;
  endtask

  task automatic make_layer(input int net, input int l, input int nin, input int nout,
                            output longint w [][], output longint b []);
    w = new[nout];
    b = new[nout];
    for (int j = 0; j < nout; j++) begin
      w[j] = new[nin];
      for (int i = 0; i < nin; i++) begin
        w[j][i] = r_rand(RONE / 8);
        wr(net, PRM_WEIGHT, l, j, i, w[j][i]);
      end
      b[j] = r_rand(RONE / 4);
      wr(net, PRM_BIAS, l, j, 0, b[j]);
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xr [], h [], e1 [], e2 [];
    int cyc, t1, t2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    make_layer(1, 0, 104, 52, w1[0], b1[0]);
    make_layer(1, 1, 52, 104, w1[1], b1[1]);
    make_layer(2, 0, 104, 104, w2[0], b2[0]);
    make_layer(2, 1, 104, 104, w2[1], b2[1]);
    make_layer(2, 2, 104, 104, w2[2], b2[2]);
    for (int f = 0; f < 3; f++) begin
      xr = new[NIN];
      @(negedge clk);
      for (int i = 0; i < NIN; i++) begin xr[i] = r_rand(2 * RONE); x[i] = fx_t'(xr[i]); end
      start = 1;
      @(posedge clk); #1 start = 0;
      cyc = 0; t1 = 0; t2 = 0;
      do begin
        @(posedge clk); #1 cyc++;
        if (done1) t1 = cyc;
        if (done2) t2 = cyc;
      end while (t2 == 0 && cyc < 2000);
      chk(t1 == 159, $sformatf("LSDNN1 latency %0d", t1));
      chk(t2 == 317, $sformatf("LSDNN2 latency %0d", t2));
      r_dense(xr, w1[0], b1[0], 1'b1, h);
      r_dense(h, w1[1], b1[1], 1'b0, e1);
      r_dense(xr, w2[0], b2[0], 1'b1, h);
      r_dense(h, w2[1], b2[1], 1'b1, h);
      r_dense(h, w2[2], b2[2], 1'b0, e2);
      for (int j = 0; j < NOUT; j++) begin
        chk(y1[j] == fx_t'(e1[j]), $sformatf("f%0d LSDNN1 y[%0d]=%0d exp %0d", f, j, y1[j], e1[j]));
        chk(y2[j] == fx_t'(e2[j]), $sformatf("f%0d LSDNN2 y[%0d]=%0d exp %0d", f, j, y2[j], e2[j]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
