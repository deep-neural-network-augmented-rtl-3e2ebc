// ls_estimator: LS channel estimation of all N_SC active sub-carriers of
// the LTS, one ls_lane per sub-carrier, all working in parallel.
//
// Inputs are the received and reference LTS as real vectors of length
// 2*N_SC (real parts in entries 0..N_SC-1, imaginary parts in entries
// N_SC..2*N_SC-1, as produced by s2p_extract). The output uses the same
// layout. The paper processes several sub-carriers in parallel in the
// programmable logic but does not say how many; this design gives every
// sub-carrier its own lane.
//
// KP is the number of received preamble symbols summed into y_vec (see
// s2p_extract). Each lane then divides by KP * x, which is the paper's LS
// formula sum(Y) / (K_p D); the scaled reference saturates like any other
// FP(24,8) value. KP = 1 by default, as in the paper's hardware description.
//
// Timing: one 'start' pulse; 'done' pulses W = 24 cycles later, when every lane
// has finished, and the output then holds until the next start.
module ls_estimator
  import lsdnn_pkg::*;
#(
  parameter int NSC = N_SC,
  parameter int KP  = 1           // preamble symbols summed into y_vec
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  y_vec [2*NSC],     // received LTS
  input  fx_t  x_vec [2*NSC],     // reference LTS
  output logic done,
  output fx_t  h_vec [2*NSC]      // LS estimate
);

  logic [NSC-1:0] lane_done;

  for (genvar k = 0; k < NSC; k++) begin : g_lane
    cplx_t xk, yk, hk;
    assign xk = '{re: fx_sat(64'(x_vec[k]) * KP), im: fx_sat(64'(x_vec[NSC + k]) * KP)};
    assign yk = '{re: y_vec[k], im: y_vec[NSC + k]};
    ls_lane u_lane (
      .clk, .rst_n, .start, .x(xk), .y(yk), .done(lane_done[k]), .h(hk)
    );
    assign h_vec[k]       = hk.re;
    assign h_vec[NSC + k] = hk.im;
  end

  assign done = &lane_done;

endmodule
