// tb_pre_processor: loads input statistics for two model slots through the
// parameter port, normalises random LS vectors with each slot, and checks
// z = (h - m) / v against an exact division, the saturation for v = 0 and
// the latency (W = 24 cycles).
module tb_pre_processor;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 104;
  localparam int LAT = 24;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic [MODEL_W-1:0] model_sel = '0;
  prm_wr_t prm = '0;
  fx_t h_vec [N], z_vec [N];
  longint m [2][N], v [2][N];
  int checks = 0, failures = 0;

  pre_processor #(.N(N), .NMODELS(4)) dut (.clk, .rst_n, .prm, .model_sel, .start,
                                           .h_vec, .done, .z_vec);

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
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < N; j++) begin
        m[s][j] = r_rand(RONE);
        v[s][j] = (s == 1 && j == 9) ? 0 : RONE / 10 + longint'($urandom_range(2 * RONE));
        wr(PRM_IN_MEAN, s, j, m[s][j]);
        wr(PRM_IN_STD, s, j, v[s][j]);
      end
    for (int f = 0; f < 6; f++) begin
      model_sel <= MODEL_W'(f % 2);
      for (int j = 0; j < N; j++) h_vec[j] = fx_t'(r_rand(4 * RONE));
      @(posedge clk);
      start <= 1; @(posedge clk); #1 start <= 0;
      cyc = 0;
      while (!done && cyc < 1000) begin @(posedge clk); #1 cyc++; end
      chk(cyc == LAT, $sformatf("latency %0d", cyc));
      for (int j = 0; j < N; j++) begin
        longint e;
        e = r_div(128'(longint'(h_vec[j]) - m[f % 2][j]), 128'(v[f % 2][j]));
        chk(z_vec[j] == fx_t'(e), $sformatf("f%0d j%0d z=%0d exp %0d", f, j, z_vec[j], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
