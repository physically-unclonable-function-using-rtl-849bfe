// wro_puf_top -- the waveform RO-PUF macro: N_PAIRS RO pairs with their
// reading circuits, all started by one enable and read by one system clock.
//
// Each pair (wro_puf_unit) turns the start-up race of its two ring oscillators
// into ID_BITS bits per system clock cycle; the words of all pairs are
// concatenated, pair p in id[p*ID_BITS +: ID_BITS]. Holding en high for k
// clock cycles yields k successive words per pair, which is how a longer ID is
// read from few oscillators (128 bits from one pair in 8 clocks of 16 bits).
// Dropping en stops the oscillators; raising it again repeats the measurement.
//
// The default is one pair of 16 bits, the circuit the paper measures. A second
// pair is the paper's 128-bit area estimate (two pairs, 64 flip-flops). The
// oscillator timings of pair p are the defaults shifted by p times a per-pair
// step; in silicon they would come from process variation, here they are a
// modelling choice (see ring_osc). The resets are this design's addition.
//
// Ports: clk (system clock, 50-100 MHz in the paper's setting), rst_n
// (asynchronous reset of the flip-flops), en (oscillator enable), id
// (N_PAIRS*ID_BITS captured bits, updated every clk edge).
module wro_puf_top #(
  parameter int unsigned N_PAIRS          = 1,
  parameter int unsigned ID_BITS          = wro_puf_pkg::ID_BITS,
  parameter int unsigned RO1_HALF_PS      = wro_puf_pkg::RO1_HALF_PS,
  parameter int unsigned RO2_HALF_PS      = wro_puf_pkg::RO2_HALF_PS,
  parameter int          RO1_PAIR_STEP_PS = wro_puf_pkg::RO1_PAIR_STEP_PS,
  parameter int          RO2_PAIR_STEP_PS = wro_puf_pkg::RO2_PAIR_STEP_PS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  output logic [N_PAIRS*ID_BITS-1:0] id
);
  timeunit 1ps;
  timeprecision 1ps;

  for (genvar p = 0; p < N_PAIRS; p++) begin : g_pair
    localparam int unsigned H1 = unsigned'(int'(RO1_HALF_PS) + p * RO1_PAIR_STEP_PS);
    localparam int unsigned H2 = unsigned'(int'(RO2_HALF_PS) + p * RO2_PAIR_STEP_PS);

    wro_puf_unit #(
      .ID_BITS     (ID_BITS),
      .RO1_HALF_PS (H1),
      .RO2_HALF_PS (H2)
    ) u_unit (
      .clk     (clk),
      .rst_n   (rst_n),
      .en      (en),
      .id_word (id[p*ID_BITS +: ID_BITS])
    );
  end

endmodule
