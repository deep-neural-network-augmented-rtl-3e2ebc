// dnn: the fully connected feed-forward network of the LSDNN estimator:
// NHL hidden layers of NHID neurons with ReLU, then a linear output layer of
// NOUT neurons, evaluated layer after layer.
//
// Defaults are the paper's LSDNN1 model: 104 inputs (real and imaginary
// parts of the 52 LS estimates), one hidden layer of K_on = 52 neurons and
// 104 outputs. The paper's LSDNN2 model (two hidden layers of 2*K_on = 104)
// is NHL = 2, NHID = 104. Each layer is a dnn_layer of parallel serial-MAC
// PEs; the next layer is activated when the previous one is done. Layers are
// numbered 0..NHL-1 (hidden) and NHL (output) on the parameter write port.
//
// Timing: a 'start' pulse; 'done' pulses NIN + 1 + NHL*(NHID + 2) cycles
// later with y valid (159 cycles at the defaults): NPREV+1 cycles per layer
// plus one cycle for each hand-over from a layer's done to the next start. x must be held stable
// while the first layer runs.
module dnn
  import lsdnn_pkg::*;
#(
  parameter int NIN     = N_RE,
  parameter int NHID    = N_SC,
  parameter int NHL     = 1,
  parameter int NOUT    = N_RE,
  parameter int NMODELS = NUM_MODELS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [MODEL_W-1:0] model_sel,
  input  prm_wr_t            prm,
  input  fx_t                x [NIN],
  output fx_t                y [NOUT],
  output logic               busy,
  output logic               done
);

  fx_t            act [NHL][NHID];
  logic [NHL:0]   l_start, l_done, l_busy;

  assign l_start[0] = start;

  for (genvar l = 0; l < NHL; l++) begin : g_hidden
    if (l == 0) begin : g_first
      dnn_layer #(.NIN(NIN), .NOUT(NHID), .RELU(1'b1), .LAYER_ID(0),
                  .NMODELS(NMODELS)) u_layer (
        .clk, .rst_n, .start(l_start[l]), .model_sel, .prm, .x,
        .y(act[l]), .busy(l_busy[l]), .done(l_done[l])
      );
    end else begin : g_next
      dnn_layer #(.NIN(NHID), .NOUT(NHID), .RELU(1'b1), .LAYER_ID(l),
                  .NMODELS(NMODELS)) u_layer (
        .clk, .rst_n, .start(l_start[l]), .model_sel, .prm, .x(act[l-1]),
        .y(act[l]), .busy(l_busy[l]), .done(l_done[l])
      );
    end
    assign l_start[l+1] = l_done[l];
  end

  dnn_layer #(.NIN(NHID), .NOUT(NOUT), .RELU(1'b0), .LAYER_ID(NHL),
              .NMODELS(NMODELS)) u_out (
    .clk, .rst_n, .start(l_start[NHL]), .model_sel, .prm, .x(act[NHL-1]),
    .y, .busy(l_busy[NHL]), .done(l_done[NHL])
  );

  assign busy = |l_busy;
  assign done = l_done[NHL];

endmodule
