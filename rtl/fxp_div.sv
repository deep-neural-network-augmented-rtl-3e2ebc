// fxp_div: sequential fixed-point divider, q = num / den with F fractional
// bits, shared by the LS estimator and the pre-processing stage.
//
// num and den are signed integers of NW bits that carry the same scale (the
// same number of fractional bits), so the quotient scaled by 2^F is
// (|num| << F) / |den|. The magnitude is found by restoring long division,
// one quotient bit per cycle, most significant bit first (W-1 bits). The
// quotient is truncated towards zero. If it does not fit in W bits, or den is
// zero, the result saturates to FX_MAX or FX_MIN with the sign of num/den
// (0/0 gives 0). The paper draws a divider and gives no detail of it; the
// restoring scheme, truncation and saturation are choices of this design.
//
// Timing: 'start' is taken when the unit is idle; 'done' pulses for one
// cycle W-1 = 23 cycles later (one per quotient bit) and 'q' then holds
// until the next start.
module fxp_div
  import lsdnn_pkg::*;
#(
  parameter int NW = 2 * W + 1          // width of num and den
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [NW-1:0] num,
  input  logic signed [NW-1:0] den,
  output logic                 busy,
  output logic                 done,
  output fx_t                  q
);

  localparam int LW = NW + 1 + F + W;   // wide enough for den << (W-1)
  localparam int BW = $clog2(W);

  logic [LW-1:0]  rem, dv;
  logic [W-2:0]   qm;
  logic [BW-1:0]  bitpos;
  logic           neg, ovf, zero;
  logic [NW:0]    num_mag, den_mag;

  always_comb begin
    num_mag = num[NW-1] ? (NW+1)'(-num) : (NW+1)'(num);
    den_mag = den[NW-1] ? (NW+1)'(-den) : (NW+1)'(den);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      rem    <= '0;
      dv     <= '0;
      qm     <= '0;
      bitpos <= '0;
      neg    <= 1'b0;
      ovf    <= 1'b0;
      zero   <= 1'b1;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem    <= LW'(num_mag) << F;
        dv     <= LW'(den_mag);
        neg    <= num[NW-1] ^ den[NW-1];
        zero   <= (num_mag == '0);
        ovf    <= (den_mag == '0) ||
                  ((LW'(num_mag) << F) >= (LW'(den_mag) << (W - 1)));
        qm     <= '0;
        bitpos <= BW'(W - 2);
        busy   <= 1'b1;
      end else if (busy) begin
        if (rem >= (dv << bitpos)) begin
          rem        <= rem - (dv << bitpos);
          qm[bitpos] <= 1'b1;
        end
        if (bitpos == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bitpos <= bitpos - 1'b1;
        end
      end
    end
  end

  always_comb begin
    if (zero)     q = '0;
    else if (ovf) q = neg ? FX_MIN : FX_MAX;
    else          q = neg ? -fx_t'({1'b0, qm}) : fx_t'({1'b0, qm});
  end

endmodule
