// tb_lsdnn_top_kp2: end-to-end test of the LSDNN channel estimator with
// KP = 2, i.e. averaging the two long training symbols of an 802.11p frame
// as in the LS formula sum(Y) / (K_p D). Otherwise the same as the
// default-size test: two random models loaded through the parameter port,
// eight frames sent as single-precision float words with random gaps, a
// receiver that stalls at random and once for a long time, and every output
// sample compared bit for bit with a reference model of the whole chain.
// Each frame is two 52-beat symbols, each with s_last: the same random
// channel times the reference LTS plus independent noise per symbol, so the
// sum differs from twice either symbol. The test requires each mechanism to
// happen at least once (as in the default-size test, plus two-symbol
// averaging) and checks the 213-cycle latency from the last input beat of a
// frame to its first output beat.
module tb_lsdnn_top_kp2;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NSC = 52, NR = 104, NH = 52, NF = 8;
  localparam int LAT = 213;

  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, s_last = 0, m_valid, m_ready = 0, m_last;
  logic [63:0] s_data = '0, m_data;   // {re, im} as single-precision floats
  prm_wr_t prm = '0;
  logic [MODEL_W-1:0] model_sel = '0;
  logic busy, frame_done, len_err;
  logic [31:0] out_stall;

  lsdnn_top #(.KP(2)) dut (.clk, .rst_n, .s_valid, .s_ready, .s_data, .s_last, .m_valid, .m_ready,
                 .m_data, .m_last, .prm, .model_sel, .busy, .frame_done, .len_err, .out_stall);

  always #5 clk = ~clk;

  int lts [NSC] = '{ 1, 1,-1,-1, 1, 1,-1, 1,-1, 1, 1, 1, 1, 1, 1,-1,-1, 1, 1,-1, 1,-1, 1, 1, 1, 1,
                     1,-1,-1, 1, 1,-1, 1,-1, 1,-1,-1,-1,-1,-1, 1, 1,-1,-1, 1,-1, 1,-1, 1, 1, 1, 1};

  // models: [model][layer][pe][input]
  longint w0 [2][][], w1 [2][][], b0 [2][], b1 [2][];
  longint im_ [2][NR], iv [2][NR], om [2][NR], ov [2][NR];
  longint expect_q [NF][NR];
  int frame_model [NF];

  int checks = 0, failures = 0;
  int n_switch = 0, n_clip = 0, n_gap = 0, n_ostall = 0, n_overlap = 0, n_lenerr = 0, n_trunc = 0, n_avg = 0;
  int frames_out = 0, t_last_in = 0, t_first_out = 0, cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input prm_kind_e kind, input int model, input int layer, input int pe,
                    input int idx, input longint d);
    @(negedge clk);
    prm = '{en: 1'b1, kind: kind, model: MODEL_W'(model), layer: 2'(layer), pe: IDX_W'(pe),
            idx: IDX_W'(idx), data: fx_t'(d)};
  endtask

  task automatic load_model(input int s);
    w0[s] = new[NH]; b0[s] = new[NH];
    for (int j = 0; j < NH; j++) begin
      w0[s][j] = new[NR];
      for (int i = 0; i < NR; i++) begin
        w0[s][j][i] = r_rand(RONE / 8);
        wr(PRM_WEIGHT, s, 0, j, i, w0[s][j][i]);
      end
      b0[s][j] = r_rand(RONE / 4);
      wr(PRM_BIAS, s, 0, j, 0, b0[s][j]);
    end
    w1[s] = new[NR]; b1[s] = new[NR];
    for (int j = 0; j < NR; j++) begin
      w1[s][j] = new[NH];
      for (int i = 0; i < NH; i++) begin
        w1[s][j][i] = r_rand(RONE / 4);
        wr(PRM_WEIGHT, s, 1, j, i, w1[s][j][i]);
      end
      b1[s][j] = r_rand(RONE / 4);
      wr(PRM_BIAS, s, 1, j, 0, b1[s][j]);
    end
    for (int j = 0; j < NR; j++) begin
      im_[s][j] = r_rand(RONE / 2);
      iv[s][j]  = RONE / 4 + longint'($urandom_range(RONE));
      om[s][j]  = r_rand(RONE / 2);
      ov[s][j]  = RONE / 4 + longint'($urandom_range(RONE));
      wr(PRM_IN_MEAN, s, 0, 0, j, im_[s][j]);
      wr(PRM_IN_STD, s, 0, 0, j, iv[s][j]);
      wr(PRM_OUT_MEAN, s, 0, 0, j, om[s][j]);
      wr(PRM_OUT_STD, s, 0, 0, j, ov[s][j]);
    end
    @(negedge clk);
    prm = '0;
  endtask

  // Reference model of the whole chain for one frame.
  task automatic model_frame(input int f, input longint yr [NSC], input longint yi [NSC]);
    longint h [], z [], a [], d [];
    int s = frame_model[f];
    h = new[NR]; z = new[NR];
    for (int k = 0; k < NSC; k++) begin
      longint x = 2 * lts[k] * RONE;
      // LS: (y1 + y2) / (2 x) with x real
      h[k]       = r_div(128'(x * yr[k]), 128'(x * x));
      h[NSC + k] = r_div(128'(x * yi[k]), 128'(x * x));
    end
    for (int j = 0; j < NR; j++) z[j] = r_div(128'(h[j] - im_[s][j]), 128'(iv[s][j]));
    r_dense(z, w0[s], b0[s], 1'b1, a);
    foreach (a[j]) if (a[j] == 0) n_clip++;
    r_dense(a, w1[s], b1[s], 1'b0, d);
    for (int j = 0; j < NR; j++) expect_q[f][j] = r_add(r_mul(d[j], ov[s][j]), om[s][j]);
  endtask

  // Float for the fixed-point input v / 2^16. Where the float has room, random
  // extra bits below 2^-16 are added away from zero; the input converter must
  // truncate them, so the estimator still sees exactly v.
  function automatic logic [31:0] f32_in(input longint v);
    longint m;
    int     p, xb;
    logic [31:0] b;
    if (v == 0) return 32'h0;
    m = (v < 0) ? -v : v;
    p = 0;
    for (int i = 0; i < 40; i++) if (m[i]) p = i;
    xb = (23 - p > 8) ? 8 : 23 - p;           // spare fraction bits
    if (xb <= 0) return r_f32(v);
    m = (m << xb) | longint'($urandom_range((1 << xb) - 1));
    if ((m & ((64'sd1 <<< xb) - 1)) != 0) n_trunc++;
    b = {v < 0, 8'(127 + p - 16), 23'((m << (23 - p - xb)) & 64'h7F_FFFF)};
    return b;
  endfunction

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- sender
  initial begin
    longint yr [NSC], yi [NSC], sr [2][NSC], si [2][NSC];
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_model(0);
    load_model(1);
    for (int f = 0; f < NF; f++) begin
      // a new LTS may only be offered once the previous one has been taken
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      if (busy) n_overlap++;
      frame_model[f] = (f < 2 || f == 5) ? 0 : 1;
      if (f > 0 && frame_model[f] != frame_model[f-1]) n_switch++;
      model_sel = MODEL_W'(frame_model[f]);
      for (int k = 0; k < NSC; k++) begin
        // received = channel * LTS, channel random in [-1.5, 1.5]
        longint hr = r_rand(3 * RONE / 2), hi = r_rand(3 * RONE / 2);
        for (int q = 0; q < 2; q++) begin
          sr[q][k] = hr * lts[k] + r_rand(RONE / 8);
          si[q][k] = hi * lts[k] + r_rand(RONE / 8);
        end
        yr[k] = r_add(sr[0][k], sr[1][k]);
        yi[k] = r_add(si[0][k], si[1][k]);
        if (sr[0][k] != sr[1][k]) n_avg++;
      end
      model_frame(f, yr, yi);
      for (int q = 0; q < 2; q++)
      for (int k = 0; k < NSC; k++) begin
        if (f != 0 && $urandom_range(4) == 0) begin
          s_valid = 0; n_gap++;
          @(negedge clk);
        end
        s_valid = 1;
        s_data  = {f32_in(sr[q][k]), f32_in(si[q][k])};
        s_last  = (f == 6 && q == 0) ? (k == 20) : (k == NSC - 1);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        @(negedge clk);
      end
      s_valid = 0; s_last = 0;
      if (f == 0) t_last_in = cycle;
      @(posedge clk); #1;
      if (len_err) n_lenerr++;
      if (f == 6) chk(len_err, "early s_last flagged");
    end
  end

  // -------------------------------------------------------------- receiver
  initial begin
    int k = 0;
    wait (rst_n);
    while (frames_out < NF) begin
      @(negedge clk);
      if (frames_out == 3 && k == 5) begin
        m_ready = 0;
        repeat (400) @(negedge clk);
      end
      m_ready = (frames_out == 0) ? 1'b1 : ($urandom_range(3) != 0);
      if (m_valid && !m_ready) n_ostall++;
      @(posedge clk);
      if (m_valid && m_ready) begin
        if (frames_out == 0 && k == 0) t_first_out = cycle;
        chk(m_data == {r_f32(expect_q[frames_out][k]), r_f32(expect_q[frames_out][NSC + k])} &&
            r_f2r(m_data[63:32]) == real'(expect_q[frames_out][k]) / 65536.0,
            $sformatf("frame %0d sample %0d: got (%f,%f) expected (%0d,%0d)/2^16", frames_out, k,
                      r_f2r(m_data[63:32]), r_f2r(m_data[31:0]),
                      expect_q[frames_out][k], expect_q[frames_out][NSC + k]));
        chk(m_last == (k == NSC - 1), "m_last");
        if (k == NSC - 1) begin k = 0; frames_out++; end
        else k++;
      end
    end
    chk(t_first_out - t_last_in == LAT,
        $sformatf("latency %0d cycles, expected %0d", t_first_out - t_last_in, LAT));
    $display("model switches %0d, ReLU clips %0d, input gaps %0d, output stalls %0d",
             n_switch, n_clip, n_gap, n_ostall);
    $display("frames waiting for output %0d cycles, LTS received during processing %0d, length errors %0d, truncated input floats %0d, averaged sub-carriers %0d",
             out_stall, n_overlap, n_lenerr, n_trunc, n_avg);
    chk(n_switch > 0, "no model switch");
    chk(n_clip > 0, "no ReLU clipping");
    chk(n_gap > 0, "no input gap");
    chk(n_ostall > 0, "no output stall");
    chk(out_stall > 0, "no frame waited for the output");
    chk(n_overlap > 0, "no LTS received during processing");
    chk(n_lenerr > 0, "no length error");
    chk(n_trunc > 0, "no input float needed truncation");
    chk(n_avg > 0, "no two-symbol averaging");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
