// sample_shift_reg -- the sampling chain of the waveform RO-PUF (lower row of
// flip-flops in the reading circuit).
//
// ID_BITS D flip-flops are clocked by the sampling oscillator RO2. The first
// one samples the waveform of RO1 (d_in); every other one takes the Q of the
// one before it. After each rising edge of ro_clk, taps[0] holds the newest
// sample of RO1 and taps[ID_BITS-1] the oldest, so the chain is a snapshot of
// the last ID_BITS samples of RO1 taken at RO2's rate (~1 GHz). That sampled
// waveform, which depends on the relative period and start-up time of the two
// oscillators, is the PUF response.
//
// The structure (one chain clocked by RO2, fed by RO1, every stage tapped)
// follows the paper's reading circuit. The asynchronous active-low reset rst_n
// is this design's addition so that a chain which has not yet seen ID_BITS
// RO2 edges reads as zeros rather than as left-over state; the paper does not
// mention a reset.
//
// Timing: one shift per rising edge of ro_clk. ro_clk is a free-running
// oscillator unrelated to any system clock.
module sample_shift_reg #(
  parameter int unsigned ID_BITS = wro_puf_pkg::ID_BITS
) (
  input  logic               ro_clk,
  input  logic               rst_n,
  input  logic               d_in,
  output logic [ID_BITS-1:0] taps
);
  timeunit 1ps;
  timeprecision 1ps;

  initial begin
    if (ID_BITS < 2) $error("sample_shift_reg: ID_BITS must be at least 2");
  end

  always_ff @(posedge ro_clk or negedge rst_n) begin
    if (!rst_n) taps <= '0;
    else        taps <= {taps[ID_BITS-2:0], d_in};
  end

endmodule
