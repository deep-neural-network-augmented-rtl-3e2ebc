// s2p_extract: serial-to-parallel conversion and real/imaginary part
// extraction of one LTS symbol.
//
// Complex samples arrive one per accepted beat on a valid/ready stream (the
// AXI-stream handshake: a beat moves when s_valid and s_ready are both high).
// Beat k (k = 0..NSC-1, in sub-carrier order) is split into its real and
// imaginary parts, stored as vec[k] and vec[NSC+k]. After NSC beats the
// vector is complete: vec_valid rises, s_ready falls, and the buffer holds
// until the consumer pulses 'consume'. The NSC-th beat should carry s_last;
// a missing or early s_last sets len_err until the next consume (the beat
// count, not s_last, closes the vector).
//
// With NSYM > 1 the buffer sums NSYM consecutive symbols (each ending with
// s_last) sub-carrier by sub-carrier, with saturation, before the vector is
// complete: the numerator of the paper's LS formula, which adds the K_p
// received preamble symbols of a frame. NSYM = 1 (the default) is the single
// LTS vector that the paper's hardware description feeds to LS estimation.
// The paper names this stage and gives its sizes ([1x52] complex in, [1x104]
// real out); the handshake, ordering, error flag and summing are this
// design's.
module s2p_extract
  import lsdnn_pkg::*;
#(
  parameter int NSC  = N_SC,
  parameter int NSYM = 1          // symbols summed per vector (K_p)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  cplx_t s_data,
  input  logic  s_last,
  output logic  vec_valid,
  output fx_t   vec [2*NSC],
  input  logic  consume,
  output logic  len_err
);

  localparam int CW = $clog2(NSC + 1);
  localparam int SW = $clog2(NSYM + 1);

  logic [CW-1:0] cnt;
  logic [SW-1:0] sym;
  logic          beat;

  assign s_ready = !vec_valid;
  assign beat    = s_valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      sym       <= '0;
      vec_valid <= 1'b0;
      len_err   <= 1'b0;
      for (int k = 0; k < 2*NSC; k++) vec[k] <= '0;
    end else if (consume) begin
      cnt       <= '0;
      sym       <= '0;
      vec_valid <= 1'b0;
      len_err   <= 1'b0;
    end else if (beat) begin
      if (sym == '0) begin
        vec[cnt]       <= s_data.re;
        vec[NSC + cnt] <= s_data.im;
      end else begin
        vec[cnt]       <= fx_add(vec[cnt], s_data.re);
        vec[NSC + cnt] <= fx_add(vec[NSC + cnt], s_data.im);
      end
      if (s_last != (cnt == CW'(NSC - 1))) len_err <= 1'b1;
      if (cnt == CW'(NSC - 1)) begin
        cnt <= '0;
        if (sym == SW'(NSYM - 1)) begin
          sym       <= '0;
          vec_valid <= 1'b1;
        end else begin
          sym <= sym + 1'b1;
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  // Stream rule: a beat offered and not taken stays offered, unchanged.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           s_valid && !s_ready && !consume |=> s_valid && $stable(s_data))
    else $error("s2p_extract: s_valid/s_data changed while stalled");

endmodule
