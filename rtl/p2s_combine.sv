// p2s_combine: real/imaginary part combination and parallel-to-serial
// conversion of the final channel estimate.
//
// A 'load' pulse captures the 2*NSC real values (real parts in entries
// 0..NSC-1, imaginary parts in NSC..2*NSC-1) into an internal buffer. The
// unit then offers NSC complex samples {re: vec[k], im: vec[NSC+k]}, k = 0
// first, on a valid/ready stream (AXI-stream rule: a beat moves when m_valid
// and m_ready are both high), with m_last on the final one. 'done' pulses
// in the cycle after the last beat has moved. A load while busy is ignored.
// The paper gives only the name and sizes ([1x104] real in, [1x52] complex
// out) of this stage; the stream and the buffer are this design's.
module p2s_combine
  import lsdnn_pkg::*;
#(
  parameter int NSC = N_SC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  fx_t   vec [2*NSC],
  output logic  busy,
  output logic  done,
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_data,
  output logic  m_last
);

  localparam int CW = $clog2(NSC);

  fx_t           buf_q [2*NSC];
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      m_valid <= 1'b0;
      done    <= 1'b0;
      for (int k = 0; k < 2*NSC; k++) buf_q[k] <= '0;
    end else begin
      done <= 1'b0;
      if (load && !m_valid) begin
        buf_q   <= vec;
        cnt     <= '0;
        m_valid <= 1'b1;
      end else if (m_valid && m_ready) begin
        if (cnt == CW'(NSC - 1)) begin
          m_valid <= 1'b0;
          done    <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  assign busy      = m_valid;
  assign m_data.re = buf_q[cnt];
  assign m_data.im = buf_q[NSC + cnt];
  assign m_last    = m_valid && (cnt == CW'(NSC - 1));

  // Stream rule: once offered, a beat stays offered and unchanged until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data))
    else $error("p2s_combine: output changed while stalled");

endmodule
