// tb_post_processor: loads output statistics for two model slots, then
// checks d = z*v + m (FP(24,8), floored product, saturation) for random
// vectors, including values large enough to saturate, and the one-cycle
// latency.
module tb_post_processor;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 104;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [MODEL_W-1:0] model_sel = '0;
  prm_wr_t prm = '0;
  fx_t z_vec [N], d_vec [N];
  longint m [2][N], v [2][N];
  int checks = 0, failures = 0;

  post_processor #(.N(N), .NMODELS(4)) dut (.clk, .rst_n, .prm, .model_sel, .start,
                                            .z_vec, .done, .d_vec);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input prm_kind_e kind, input int model, input int idx, input longint d);
    @(negedge clk);
    prm = '{en: 1'b1, kind: kind, model: MODEL_W'(model), layer: '0, pe: '0,
            idx: IDX_W'(idx), data: fx_t'(d)};
    @(posedge clk);
    #1 prm = '0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < N; j++) begin
        m[s][j] = r_rand(2 * RONE);
        v[s][j] = longint'($urandom_range(4 * RONE));
        wr(PRM_OUT_MEAN, s, j, m[s][j]);
        wr(PRM_OUT_STD, s, j, v[s][j]);
        // input statistics must not land here
        wr(PRM_IN_MEAN, s, j, 12345);
      end
    for (int f = 0; f < 6; f++) begin
      model_sel <= MODEL_W'(f % 2);
      for (int j = 0; j < N; j++) z_vec[j] = fx_t'(r_rand(f == 5 ? RMAX : 8 * RONE));
      @(posedge clk);
      start <= 1; @(posedge clk); #1 start <= 0;
      chk(done, "done in the cycle after start");
      @(posedge clk); #1;
      chk(!done, "done is a single pulse");
      for (int j = 0; j < N; j++) begin
        longint e;
        e = r_add(r_mul(z_vec[j], v[f % 2][j]), m[f % 2][j]);
        chk(d_vec[j] == fx_t'(e), $sformatf("f%0d j%0d d=%0d exp %0d", f, j, d_vec[j], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
