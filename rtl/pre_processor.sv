// pre_processor: normalisation of the LS estimate before the DNN,
// z[j] = (h[j] - m[j]) / v[j], for all N real inputs in parallel.
//
// m and v are the mean and standard deviation of DNN input j, computed
// offline from the training set (the paper states that they are not
// estimated at run time) and written through the parameter port into one of
// NMODELS model slots; 'model_sel' picks the slot used. Each lane has a
// subtractor and a divider, as the paper's pre-processing detail shows. The
// statistics are kept per real entry (per sub-carrier, separately for the
// real and imaginary part), following the m_r/v_r and m_i/v_i labels there.
//
// Timing: 'start' registers h - m; the dividers run the next cycle and 'done'
// pulses W = 24 cycles after the 'start' cycle. z holds until the next start.
module pre_processor
  import lsdnn_pkg::*;
#(
  parameter int N       = N_RE,
  parameter int NMODELS = NUM_MODELS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  prm_wr_t            prm,
  input  logic [MODEL_W-1:0] model_sel,
  input  logic               start,
  input  fx_t                h_vec [N],
  output logic               done,
  output fx_t                z_vec [N]
);

  localparam int NW = W + 1;

  fx_t  mean_mem [NMODELS][N];
  fx_t  std_mem  [NMODELS][N];
  logic [N-1:0] lane_done;
  logic go;

  always_ff @(posedge clk) begin
    if (prm.en && int'(prm.model) < NMODELS && int'(prm.idx) < N) begin
      if (prm.kind == PRM_IN_MEAN) mean_mem[prm.model][prm.idx] <= prm.data;
      if (prm.kind == PRM_IN_STD)  std_mem[prm.model][prm.idx]  <= prm.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) go <= 1'b0;
    else        go <= start;
  end

  for (genvar j = 0; j < N; j++) begin : g_lane
    logic signed [NW-1:0] diff, sd;
    logic busy;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        diff <= '0;
        sd   <= '0;
      end else if (start) begin
        diff <= NW'(h_vec[j]) - NW'(mean_mem[model_sel][j]);
        sd   <= NW'(std_mem[model_sel][j]);
      end
    end
    fxp_div #(.NW(NW)) u_div (
      .clk, .rst_n, .start(go), .num(diff), .den(sd),
      .busy, .done(lane_done[j]), .q(z_vec[j])
    );
  end

  assign done = &lane_done;

endmodule
