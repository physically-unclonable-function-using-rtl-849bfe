// wro_puf_unit -- one RO pair of the waveform RO-PUF with its reading circuit.
//
// Two ring oscillators start together from 0 when en rises. RO1 is sampled by
// a chain of ID_BITS flip-flops that RO2 clocks, so the chain records RO1's
// start-up waveform at RO2's rate. If RO1 is slower than RO2 (t1 > t2) the
// first sample is 0, if it is faster it is 1, and the following samples walk
// through RO1's waveform with a beat of t1/|t1-t2| samples, so the whole
// pattern depends on the relative timing of the two oscillators of a given
// chip. A row of ID_BITS flip-flops on the system clock copies the chain once
// per clk cycle and drives id_word.
//
// Parameters give the ID width (16 on the measured chip) and the two
// oscillators' behavioural timings (see ring_osc). The connection of the four
// parts follows the paper's reading circuit; the resets are this design's.
//
// Ports: clk (system clock), rst_n (asynchronous reset of both flip-flop rows),
// en (starts both oscillators when 1, stops them when 0), id_word (captured
// samples, bit 0 the newest).
// Timing: the chain fills in ID_BITS RO2 periods after en rises (about 15 ns
// at the defaults); id_word shows the chain as it was at the last clk edge.
module wro_puf_unit #(
  parameter int unsigned ID_BITS        = wro_puf_pkg::ID_BITS,
  parameter int unsigned RO1_HALF_PS    = wro_puf_pkg::RO1_HALF_PS,
  parameter int unsigned RO1_FIRST_PS   = RO1_HALF_PS,
  parameter int unsigned RO2_HALF_PS    = wro_puf_pkg::RO2_HALF_PS,
  parameter int unsigned RO2_FIRST_PS   = RO2_HALF_PS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  output logic [ID_BITS-1:0] id_word
);
  timeunit 1ps;
  timeprecision 1ps;

  logic               ro1;    // sampled waveform
  logic               ro2;    // sampling clock
  logic [ID_BITS-1:0] taps;

  ring_osc #(.HALF_PERIOD_PS(RO1_HALF_PS), .FIRST_RISE_PS(RO1_FIRST_PS)) u_ro1 (
    .en     (en),
    .ro_out (ro1)
  );

  ring_osc #(.HALF_PERIOD_PS(RO2_HALF_PS), .FIRST_RISE_PS(RO2_FIRST_PS)) u_ro2 (
    .en     (en),
    .ro_out (ro2)
  );

  sample_shift_reg #(.ID_BITS(ID_BITS)) u_chain (
    .ro_clk (ro2),
    .rst_n  (rst_n),
    .d_in   (ro1),
    .taps   (taps)
  );

  id_capture_reg #(.ID_BITS(ID_BITS)) u_capture (
    .clk     (clk),
    .rst_n   (rst_n),
    .taps    (taps),
    .id_word (id_word)
  );

endmodule
