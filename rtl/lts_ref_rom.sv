// lts_ref_rom: memory holding the reference long training symbol (LTS) and
// replaying it as a stream of complex samples.
//
// The LTS of IEEE 802.11p (the same as 802.11a) is BPSK: every active
// sub-carrier k = -26..-1, 1..26 carries +1 or -1 and the DC sub-carrier is
// null. The 52 signs are the standard's (the paper only says the reference
// comes from memory). Entry k of the ROM is sub-carrier k-26 for k < 26 and
// k-25 otherwise, i.e. the 52 active sub-carriers in ascending order, which
// is the order in which the received LTS must also be delivered. Values are
// +-1.0 in FP(24,8) on the real part, zero imaginary part.
//
// Timing: a 'start' pulse (re)starts the replay from entry 0; one sample is
// offered per cycle on m_valid/m_data while m_ready is high, the last with
// m_last; m_valid then falls until the next start.
module lts_ref_rom
  import lsdnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  m_valid,
  input  logic  m_ready,
  output cplx_t m_data,
  output logic  m_last
);

  // Bit k = 1 means -1 on active sub-carrier k (ascending order).
  // L(-26..-1) = 1 1 -1 -1 1 1 -1 1 -1 1 1 1 1 1 1 -1 -1 1 1 -1 1 -1 1 1 1 1
  // L(1..26)   = 1 -1 -1 1 1 -1 1 -1 1 -1 -1 -1 -1 -1 1 1 -1 -1 1 -1 1 -1 1 1 1 1
  localparam logic [0:N_SC-1] NEG = {
    26'b00110010100000011001010000,
    26'b01100101011111001101010000
  };

  localparam int AW = $clog2(N_SC);

  logic [AW-1:0] addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr    <= '0;
      m_valid <= 1'b0;
    end else if (start) begin
      addr    <= '0;
      m_valid <= 1'b1;
    end else if (m_valid && m_ready) begin
      if (addr == AW'(N_SC - 1)) m_valid <= 1'b0;
      else                       addr    <= addr + 1'b1;
    end
  end

  assign m_data.re = NEG[addr] ? -FX_ONE : FX_ONE;
  assign m_data.im = '0;
  assign m_last    = (addr == AW'(N_SC - 1));

endmodule
