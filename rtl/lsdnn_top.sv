// lsdnn_top: DNN-augmented least-squares (LSDNN) channel estimator for the
// preamble of an IEEE 802.11p OFDM frame.
//
// One estimate is made per frame from the long training symbol (LTS): the 52
// received active sub-carriers enter on the s_* stream (ascending sub-carrier
// order, after the receiver's FFT), the reference LTS is replayed from an
// internal ROM, and 52 refined complex channel gains leave on the m_* stream.
// The chain is the paper's: serial-to-parallel conversion and real/imaginary
// extraction, LS estimation per sub-carrier (y/x), normalisation of the 104
// real values with stored mean and standard deviation, a fully connected DNN
// (by default 104-52-104, ReLU on the hidden layer), de-normalisation, and
// recombination into complex samples. Samples cross the boundary as 64-bit
// words holding two IEEE 754 single-precision floats {re, im}, as in the
// paper's Fig. 6; they are converted to and from FP(24,8) at the ports
// (combinationally), and all internal arithmetic is FP(24,8).
//
// With KP > 1 the receive buffer sums KP consecutive LTS symbols (each a
// 52-beat packet ending with s_last) and LS divides by KP times the
// reference, which is the averaging over the frame's K_p preamble symbols in
// the paper's LS formula. The default KP = 1 follows the paper's hardware
// description, where one LTS vector enters LS estimation.
//
// Several trained models may be stored (NMODELS slots of weights, biases and
// statistics, all loaded through the 'prm' write port); model_sel is sampled
// at the start of every frame, so the model can be switched between frames
// without reloading anything (the paper's adaptable architecture with
// parameters in on-chip memory).
//
// A small controller sequences the stages. The receive and reference
// buffers are released (and the reference replay restarted) as soon as LS
// estimation has started, so the next LTS can be received while the current
// one is processed; if the output
// stream is still busy with the previous estimate, the finished frame waits
// (out_stall counts those cycles).
//
// Timing per frame: from the cycle the last input beat is accepted to the
// first output beat is 213 cycles with the default sizes: 1 (LS start) + 24
// (LS) + 1 + 24 (normalisation) + 1 + 159 (DNN, NIN+1+NHL*(NHID+2)) + 1 + 1
// (de-normalisation) + 1 (output load); then 52 output beats.
module lsdnn_top
  import lsdnn_pkg::*;
#(
  parameter int NSC     = N_SC,
  parameter int NHID    = N_SC,
  parameter int NHL     = 1,
  parameter int NMODELS = NUM_MODELS,
  parameter int KP      = 1           // received LTS symbols averaged per estimate
) (
  input  logic               clk,
  input  logic               rst_n,
  // received LTS, one complex sample per beat: {re, im} as fp32
  input  logic               s_valid,
  output logic               s_ready,
  input  logic [63:0]        s_data,
  input  logic               s_last,
  // channel estimate, one complex sample per beat: {re, im} as fp32
  output logic               m_valid,
  input  logic               m_ready,
  output logic [63:0]        m_data,
  output logic               m_last,
  // model parameters and model choice
  input  prm_wr_t            prm,
  input  logic [MODEL_W-1:0] model_sel,
  // status
  output logic               busy,
  output logic               frame_done,
  output logic               len_err,
  output logic [31:0]        out_stall
);

  localparam int NR = 2 * NSC;

  typedef enum logic [2:0] {
    S_INIT, S_LOAD, S_LS, S_PRE, S_DNN, S_POST, S_OUT
  } state_e;

  state_e             state;
  logic [MODEL_W-1:0] model_q;

  // stage handshakes
  logic ls_start, ls_done, pre_start, pre_done, dnn_start, dnn_done, dnn_busy;
  logic post_start, post_done, out_load, out_busy, out_done;
  logic rx_valid, ref_valid, consume, rom_start, ref_err;

  // reference LTS stream
  logic  ref_s_valid, ref_s_ready, ref_s_last;
  cplx_t ref_s_data;

  // vectors between stages
  fx_t rx_vec [NR];
  fx_t ref_vec [NR];
  fx_t h_vec [NR];
  fx_t z_vec [NR];
  fx_t d_vec [NR];
  fx_t e_vec [NR];

  // float boundary
  cplx_t s_fx, m_fx;

  float_to_fixed u_f2x_re (.f(s_data[63:32]), .x(s_fx.re));
  float_to_fixed u_f2x_im (.f(s_data[31:0]),  .x(s_fx.im));
  fixed_to_float u_x2f_re (.x(m_fx.re), .f(m_data[63:32]));
  fixed_to_float u_x2f_im (.x(m_fx.im), .f(m_data[31:0]));

  s2p_extract #(.NSC(NSC), .NSYM(KP)) u_s2p_rx (
    .clk, .rst_n, .s_valid, .s_ready, .s_data(s_fx), .s_last,
    .vec_valid(rx_valid), .vec(rx_vec), .consume, .len_err
  );

  lts_ref_rom u_ref_rom (
    .clk, .rst_n, .start(rom_start), .m_valid(ref_s_valid),
    .m_ready(ref_s_ready), .m_data(ref_s_data), .m_last(ref_s_last)
  );

  s2p_extract #(.NSC(NSC)) u_s2p_ref (
    .clk, .rst_n, .s_valid(ref_s_valid), .s_ready(ref_s_ready),
    .s_data(ref_s_data), .s_last(ref_s_last),
    .vec_valid(ref_valid), .vec(ref_vec), .consume, .len_err(ref_err)
  );

  ls_estimator #(.NSC(NSC), .KP(KP)) u_ls (
    .clk, .rst_n, .start(ls_start), .y_vec(rx_vec), .x_vec(ref_vec),
    .done(ls_done), .h_vec
  );

  pre_processor #(.N(NR), .NMODELS(NMODELS)) u_pre (
    .clk, .rst_n, .prm, .model_sel(model_q), .start(pre_start),
    .h_vec, .done(pre_done), .z_vec
  );

  dnn #(.NIN(NR), .NHID(NHID), .NHL(NHL), .NOUT(NR), .NMODELS(NMODELS)) u_dnn (
    .clk, .rst_n, .start(dnn_start), .model_sel(model_q), .prm,
    .x(z_vec), .y(d_vec), .busy(dnn_busy), .done(dnn_done)
  );

  post_processor #(.N(NR), .NMODELS(NMODELS)) u_post (
    .clk, .rst_n, .prm, .model_sel(model_q), .start(post_start),
    .z_vec(d_vec), .done(post_done), .d_vec(e_vec)
  );

  p2s_combine #(.NSC(NSC)) u_p2s (
    .clk, .rst_n, .load(out_load), .vec(e_vec), .busy(out_busy),
    .done(out_done), .m_valid, .m_ready, .m_data(m_fx), .m_last
  );

  // ---------------------------------------------------------------- control
  always_comb begin
    ls_start   = (state == S_LOAD) && rx_valid && ref_valid;
    rom_start  = (state == S_INIT) || ls_start;
    consume    = ls_start;
    pre_start  = (state == S_LS)   && ls_done;
    dnn_start  = (state == S_PRE)  && pre_done;
    post_start = (state == S_DNN)  && dnn_done;
    out_load   = (state == S_OUT)  && !out_busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      model_q    <= '0;
      frame_done <= 1'b0;
      out_stall  <= '0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        S_INIT: state <= S_LOAD;
        S_LOAD: if (ls_start) begin
                  // clamp an out-of-range model choice to slot 0
                  model_q <= (int'(model_sel) < NMODELS) ? model_sel : '0;
                  state   <= S_LS;
                end
        S_LS:   if (pre_start)  state <= S_PRE;
        S_PRE:  if (dnn_start)  state <= S_DNN;
        S_DNN:  if (post_start) state <= S_POST;
        S_POST: if (post_done)  state <= S_OUT;
        S_OUT:  if (out_load) begin
                  frame_done <= 1'b1;
                  state      <= S_LOAD;
                end else begin
                  out_stall <= out_stall + 1'b1;
                end
        default: state <= S_INIT;
      endcase
    end
  end

  assign busy = ((state != S_LOAD) && (state != S_INIT)) || out_busy;

  // The reference stream is produced here and always has the right length.
  a_ref_len: assert property (@(posedge clk) disable iff (!rst_n) !ref_err)
    else $error("lsdnn_top: reference LTS length error");

endmodule
