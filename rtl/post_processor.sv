// post_processor: de-normalisation of the DNN output, d[j] = z[j]*v[j] + m[j],
// for all N real outputs in parallel.
//
// Each lane has one multiplier and one adder, as in the paper's
// post-processing detail. m and v are the mean and standard deviation of
// the DNN's training targets, written through the parameter port per model
// slot; this design keeps them apart from the input statistics of
// pre_processor (the paper uses the same letters for both). Arithmetic is
// FP(24,8), product truncated, both steps saturating.
//
// Timing: 'start' loads the result register; 'done' pulses one cycle later,
// with d valid from then until the next start.
module post_processor
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
  input  fx_t                z_vec [N],
  output logic               done,
  output fx_t                d_vec [N]
);

  fx_t mean_mem [NMODELS][N];
  fx_t std_mem  [NMODELS][N];

  always_ff @(posedge clk) begin
    if (prm.en && int'(prm.model) < NMODELS && int'(prm.idx) < N) begin
      if (prm.kind == PRM_OUT_MEAN) mean_mem[prm.model][prm.idx] <= prm.data;
      if (prm.kind == PRM_OUT_STD)  std_mem[prm.model][prm.idx]  <= prm.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      for (int j = 0; j < N; j++) d_vec[j] <= '0;
    end else begin
      done <= start;
      if (start)
        for (int j = 0; j < N; j++)
          d_vec[j] <= fx_add(fx_mul(z_vec[j], std_mem[model_sel][j]),
                             mean_mem[model_sel][j]);
    end
  end

endmodule
