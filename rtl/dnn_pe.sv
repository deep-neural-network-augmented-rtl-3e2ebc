// dnn_pe: one neuron (processing element) of a fully connected layer,
//   y = b + sum_{i=0}^{NPREV-1} w[i] * x[i],
// computed serially, one multiply-accumulate per cycle.
//
// Structure, as drawn in the paper's PE detail: a counter selects input x[i]
// through a multiplexer and addresses the weight memory; a multiplier and an
// adder accumulate into a register whose input multiplexer forces 0 while
// pe_en is low; when the counter reaches NPREV a comparator adds the bias
// from the bias memory and loads the output register, which otherwise keeps
// its value. The weight memory holds NPREV weights and the bias memory one
// bias for each of NMODELS model slots; model_sel chooses the slot. The
// product is truncated to FP(24,8) and both additions saturate (this
// design's choice).
//
// Timing: raise pe_en and hold it. In cycles 0..NPREV-1 of pe_en the
// products are accumulated; in cycle NPREV the output register is loaded and
// y_valid pulses for one cycle. The counter then wraps to 0, so pe_en must
// fall after that cycle for a single pass. Total NPREV+1 cycles.
module dnn_pe
  import lsdnn_pkg::*;
#(
  parameter int NPREV   = N_RE,
  parameter int NMODELS = NUM_MODELS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               pe_en,
  input  logic [MODEL_W-1:0] model_sel,
  input  fx_t                x [NPREV],
  // parameter write port (already decoded for this PE)
  input  logic               w_we,
  input  logic               b_we,
  input  logic [MODEL_W-1:0] wr_model,
  input  logic [IDX_W-1:0]   wr_idx,
  input  fx_t                wr_data,
  output fx_t                y,
  output logic               y_valid
);

  localparam int CW = $clog2(NPREV + 1);

  fx_t           wmem [NMODELS][NPREV];
  fx_t           bmem [NMODELS];
  logic [CW-1:0] cnt;
  fx_t           acc, prod, xin;
  logic          last;

  always_ff @(posedge clk) begin
    if (w_we && int'(wr_model) < NMODELS && int'(wr_idx) < NPREV)
      wmem[wr_model][wr_idx] <= wr_data;
    if (b_we && int'(wr_model) < NMODELS)
      bmem[wr_model] <= wr_data;
  end

  assign last = (cnt == CW'(NPREV));
  assign xin  = last ? '0 : x[cnt];
  assign prod = last ? '0 : fx_mul(xin, wmem[model_sel][cnt]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      acc     <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      if (!pe_en) begin
        cnt <= '0;
        acc <= '0;
      end else if (last) begin
        y       <= fx_add(acc, bmem[model_sel]);
        y_valid <= 1'b1;
        cnt     <= '0;
        acc     <= '0;
      end else begin
        acc <= fx_add(acc, prod);
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
