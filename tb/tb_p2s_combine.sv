// tb_p2s_combine: loads random 104-value vectors and reads the 52 complex
// samples back through a receiver that stalls at random. Checks the
// real/imaginary pairing, the order, m_last, the done pulse, and that a load
// arriving while a vector is still being sent is ignored.
module tb_p2s_combine;
  import lsdnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NSC = 52;

  logic clk = 0, rst_n = 0, load = 0, busy, done, m_valid, m_ready = 0, m_last;
  cplx_t m_data;
  fx_t vec [2*NSC];
  longint ref_v [2*NSC];
  int checks = 0, failures = 0, stalls = 0;

  p2s_combine #(.NSC(NSC)) dut (.clk, .rst_n, .load, .vec, .busy, .done, .m_valid,
                                .m_ready, .m_data, .m_last);

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
    int k;
    bit seen_done;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      @(negedge clk);
      for (int j = 0; j < 2*NSC; j++) begin ref_v[j] = r_rand(RMAX); vec[j] = fx_t'(ref_v[j]); end
      load = 1;
      @(negedge clk);
      load = 0;
      // scramble the input and try a second load while busy
      for (int j = 0; j < 2*NSC; j++) vec[j] = fx_t'(r_rand(RMAX));
      load = 1;
      @(negedge clk);
      load = 0;
      chk(busy, "busy after load");
      k = 0;
      seen_done = 0;
      while (k < NSC) begin
        m_ready = ($urandom_range(2) != 0);
        if (!m_ready && m_valid) stalls++;
        @(posedge clk);
        if (m_valid && m_ready) begin
          chk(m_data.re == fx_t'(ref_v[k]) && m_data.im == fx_t'(ref_v[NSC + k]),
              $sformatf("f%0d sample %0d", f, k));
          chk(m_last == (k == NSC - 1), $sformatf("m_last at %0d", k));
          k++;
        end
        #1;
        if (done) seen_done = 1;
        @(negedge clk);
      end
      m_ready = 0;
      #1 if (done) seen_done = 1;
      chk(seen_done, "done pulse");
      chk(!m_valid && !busy, "idle after the last beat");
    end
    chk(stalls > 0, "receiver never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
