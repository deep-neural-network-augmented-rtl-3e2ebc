// tb_lts_ref_rom: replays the reference LTS twice, with random stalls on
// m_ready, and compares every sample with the 802.11a/p LTS sequence.
module tb_lts_ref_rom;
  import lsdnn_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, m_valid, m_ready = 0, m_last;
  cplx_t m_data;
  int checks = 0, failures = 0;

  // L(-26..-1), L(1..26) of the standard
  int lts [52] = '{ 1, 1,-1,-1, 1, 1,-1, 1,-1, 1, 1, 1, 1, 1, 1,-1,-1, 1, 1,-1, 1,-1, 1, 1, 1, 1,
                    1,-1,-1, 1, 1,-1, 1,-1, 1,-1,-1,-1,-1,-1, 1, 1,-1,-1, 1,-1, 1,-1, 1, 1, 1, 1};

  lts_ref_rom dut (.clk, .rst_n, .start, .m_valid, .m_ready, .m_data, .m_last);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    chk(!m_valid, "valid before start");
    for (int rep = 0; rep < 2; rep++) begin
      start <= 1; @(posedge clk); start <= 0;
      k = 0;
      while (k < 52) begin
        m_ready <= ($urandom_range(3) != 0);
        @(posedge clk);
        if (m_valid && m_ready) begin
          chk(m_data.re == fx_t'(lts[k] * 65536), $sformatf("re[%0d]=%0d", k, m_data.re));
          chk(m_data.im == 0, "im");
          chk(m_last == (k == 51), $sformatf("last at %0d", k));
          k++;
        end
      end
      m_ready <= 1;
      @(posedge clk); #1;
      chk(!m_valid, "valid after last");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
