// id_capture_reg -- the read-out row of the waveform RO-PUF (upper row of
// flip-flops, outputs out0..out15 in the paper's 16-bit reading circuit).
//
// ID_BITS D flip-flops share the system clock. On every rising edge of clk
// they copy all taps of the sampling chain at once, so bit i of id_word is
// the i-th newest RO1 sample at that instant. Because the sampling chain runs
// on RO2, this register is where the oscillator domain is handed to the
// system-clock domain; one ID word is produced per system clock cycle.
//
// Structure and clocking follow the paper's circuit. The asynchronous
// active-low reset is this design's addition. The crossing from the RO2
// domain is not synchronised: a tap that changes close to the clk edge may
// be captured either way, which adds to the bit noise of the PUF; the paper's
// circuit has no synchroniser either.
//
// Timing: id_word is valid one clk edge after the taps it shows.
module id_capture_reg #(
  parameter int unsigned ID_BITS = wro_puf_pkg::ID_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [ID_BITS-1:0] taps,
  output logic [ID_BITS-1:0] id_word
);
  timeunit 1ps;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) id_word <= '0;
    else        id_word <= taps;
  end

endmodule
