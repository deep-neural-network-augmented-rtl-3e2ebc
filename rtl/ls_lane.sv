// ls_lane: least-squares channel estimate of one sub-carrier, H = y / x,
// where y is the received LTS value and x the reference LTS value.
//
// The datapath follows the LS-estimation detail drawn in the paper: six real
// multipliers form
//   num_r = x_r*y_r + x_i*y_i
//   num_i = x_r*y_i - x_i*y_r
//   den   = x_r*x_r + x_i*x_i
// and two dividers share the denominator. Products are kept at full
// precision (2F fractional bits) so the dividers see num and den on the same
// scale; the quotients come out in FP(24,8). The paper's equation prints a
// '+' in the imaginary numerator while its figure shows a subtractor; the
// subtractor is the correct complex division and is what is built.
//
// Timing: 'start' registers the products; the dividers start the next cycle
// and 'done' pulses W = 24 cycles after the 'start' cycle. 'h' holds until the next start.
module ls_lane
  import lsdnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  cplx_t x,        // reference LTS value
  input  cplx_t y,        // received LTS value
  output logic  done,
  output cplx_t h
);

  localparam int NW = 2 * W + 1;

  logic signed [NW-1:0] num_r, num_i, den;
  logic                 div_go, busy_r, busy_i, done_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_r  <= '0;
      num_i  <= '0;
      den    <= '0;
      div_go <= 1'b0;
    end else begin
      div_go <= start;
      if (start) begin
        num_r <= NW'(x.re) * NW'(y.re) + NW'(x.im) * NW'(y.im);
        num_i <= NW'(x.re) * NW'(y.im) - NW'(x.im) * NW'(y.re);
        den   <= NW'(x.re) * NW'(x.re) + NW'(x.im) * NW'(x.im);
      end
    end
  end

  fxp_div #(.NW(NW)) u_div_r (
    .clk, .rst_n, .start(div_go), .num(num_r), .den(den),
    .busy(busy_r), .done(done), .q(h.re)
  );

  fxp_div #(.NW(NW)) u_div_i (
    .clk, .rst_n, .start(div_go), .num(num_i), .den(den),
    .busy(busy_i), .done(done_i), .q(h.im)
  );

  // Both dividers are started together and have the same latency.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (done == done_i) && (busy_r == busy_i))
    else $error("ls_lane: dividers out of step");

endmodule
