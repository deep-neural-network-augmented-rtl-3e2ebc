// tb_s2p_extract: streams LTS symbols with random gaps into the
// serial-to-parallel stage and checks the real/imaginary layout of the
// vector, the back-pressure while the vector is held, the beat count, and the
// length-error flag for a symbol whose s_last comes early. A second
// instance with NSYM = 2 then receives pairs of symbols and must hold their
// saturated sum.
module tb_s2p_extract;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NSC = 52;

  logic clk = 0, rst_n = 0, s_valid = 0, s_last = 0, consume = 0;
  logic s_ready, vec_valid, len_err;
  logic s_ready2, vec_valid2, len_err2, consume2 = 0, sel = 0, rdy;
  fx_t vec2 [2*NSC];
  cplx_t s_data = '0;
  fx_t vec [2*NSC];
  int checks = 0, failures = 0;
  longint re_exp [NSC], im_exp [NSC];

  s2p_extract #(.NSC(NSC)) dut (.clk, .rst_n, .s_valid(s_valid && !sel), .s_ready, .s_data, .s_last,
                                .vec_valid, .vec, .consume, .len_err);
  // second instance: sums two symbols; it sees s_valid only while sel = 1
  s2p_extract #(.NSC(NSC), .NSYM(2)) dut2 (.clk, .rst_n, .s_valid(s_valid && sel),
                                           .s_ready(s_ready2), .s_data, .s_last,
                                           .vec_valid(vec_valid2), .vec(vec2),
                                           .consume(consume2), .len_err(len_err2));
  assign rdy = sel ? s_ready2 : s_ready;

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Send one symbol; the beat with index 'last_at' carries s_last. With
  // acc = 1 the expected values are added to the previous symbol's.
  task automatic send(input int last_at, input bit acc = 0);
    int k = 0;
    while (k < NSC) begin
      if ($urandom_range(3) == 0) begin
        s_valid <= 0;
        @(posedge clk);
      end else begin
        longint re = r_rand(RMAX), im = r_rand(RMAX);
        re_exp[k] = acc ? r_add(re_exp[k], re) : re;
        im_exp[k] = acc ? r_add(im_exp[k], im) : im;
        s_valid <= 1;
        s_data  <= '{re: fx_t'(re), im: fx_t'(im)};
        s_last  <= (k == last_at);
        @(posedge clk);
        while (!rdy) @(posedge clk);
        k++;
      end
    end
    s_valid <= 0;
    s_last  <= 0;
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
    for (int f = 0; f < 4; f++) begin
      send(f == 2 ? 10 : NSC - 1);
      @(posedge clk); #1;
      chk(vec_valid, "vector complete");
      chk(!s_ready, "ready low while vector held");
      chk(len_err == (f == 2), $sformatf("len_err=%0b in symbol %0d", len_err, f));
      for (int k = 0; k < NSC; k++) begin
        chk(vec[k] == fx_t'(re_exp[k]), $sformatf("re[%0d]", k));
        chk(vec[NSC + k] == fx_t'(im_exp[k]), $sformatf("im[%0d]", k));
      end
      // the vector holds while nobody consumes it
      repeat (3) @(posedge clk);
      #1 chk(!s_ready && vec[0] == fx_t'(re_exp[0]), "held while full");
      consume <= 1; @(posedge clk); consume <= 0;
      #1 chk(!vec_valid && s_ready && !len_err, "consume frees the buffer");
    end
    // two-symbol sums
    sel = 1;
    for (int f = 0; f < 3; f++) begin
      send(NSC - 1);
      @(posedge clk); #1;
      chk(!vec_valid2 && s_ready2, "NSYM=2: not complete after one symbol");
      send(NSC - 1, 1);
      @(posedge clk); #1;
      chk(vec_valid2 && !s_ready2 && !len_err2, "NSYM=2: complete after two symbols");
      for (int k = 0; k < NSC; k++)
        chk(vec2[k] == fx_t'(re_exp[k]) && vec2[NSC + k] == fx_t'(im_exp[k]),
            $sformatf("NSYM=2 sum %0d: (%0d,%0d) exp (%0d,%0d)", k, vec2[k], vec2[NSC + k],
                      re_exp[k], im_exp[k]));
      consume2 <= 1; @(posedge clk); consume2 <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
