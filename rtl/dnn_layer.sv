// dnn_layer: one fully connected layer of NOUT processing elements (dnn_pe)
// working in parallel on the same NIN inputs, with an optional ReLU on every
// output.
//
// Scheduling follows the paper: in each cycle the same input x[i] (the output
// of PE i of the previous layer) is multiplied by all NOUT PEs with their own
// weights w[i][j] and accumulated into their own registers; after NIN cycles
// the bias is added, and the PE output registers form the fully partitioned
// layer output read in parallel by the next layer. ReLU follows each hidden
// layer (RELU = 1) and is left out on the output layer (RELU = 0).
//
// Parameter words for this layer (prm.layer == LAYER_ID) are decoded here:
// PRM_WEIGHT writes weight prm.idx of PE prm.pe, PRM_BIAS its bias.
//
// Timing: a 'start' pulse raises pe_en; 'done' pulses NIN+1 cycles after the
// cycle in which start was high, together with valid outputs, which then
// hold until the layer runs again. The inputs must be stable meanwhile.
module dnn_layer
  import lsdnn_pkg::*;
#(
  parameter int NIN      = N_RE,
  parameter int NOUT     = N_SC,
  parameter bit RELU     = 1'b1,
  parameter int LAYER_ID = 0,
  parameter int NMODELS  = NUM_MODELS
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

  logic            pe_en;
  logic [NOUT-1:0] yv;
  logic            sel_layer;

  assign sel_layer = prm.en && (int'(prm.layer) == LAYER_ID);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     pe_en <= 1'b0;
    else if (start) pe_en <= 1'b1;
    else if (yv[0]) pe_en <= 1'b0;
  end

  for (genvar j = 0; j < NOUT; j++) begin : g_pe
    fx_t  pe_y;
    logic hit;
    assign hit = sel_layer && (int'(prm.pe) == j);
    dnn_pe #(.NPREV(NIN), .NMODELS(NMODELS)) u_pe (
      .clk, .rst_n, .pe_en, .model_sel, .x,
      .w_we(hit && prm.kind == PRM_WEIGHT),
      .b_we(hit && prm.kind == PRM_BIAS),
      .wr_model(prm.model), .wr_idx(prm.idx), .wr_data(prm.data),
      .y(pe_y), .y_valid(yv[j])
    );
    if (RELU) begin : g_relu
      dnn_relu u_relu (.x(pe_y), .y(y[j]));
    end else begin : g_lin
      assign y[j] = pe_y;
    end
  end

  assign busy = pe_en;
  assign done = yv[0];

  // All PEs of a layer run in lockstep.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (yv == '0) || (yv == '1))
    else $error("dnn_layer: PEs out of step");

endmodule
