// ring_osc -- BEHAVIOURAL MODEL (not synthesizable) of one enable-gated ring
// oscillator, used as RO1 (the sampled waveform) and RO2 (the sampling clock)
// of the waveform RO-PUF.
//
// On silicon this is a short loop of standard cells closed through a gate
// that EN controls; its period comes from transistor delays and process
// variation, which is exactly what the PUF measures, so it cannot be written
// as logic. The model reproduces the behaviour the design relies on:
//   * while en = 0 the output rests at 0;
//   * when en rises, the output stays 0 for FIRST_RISE_PS, then rises and
//     toggles every HALF_PERIOD_PS (period t = 2*HALF_PERIOD_PS);
//   * when en falls, the oscillation stops at the end of the current half
//     period and the output returns to 0, ready for the next start.
// A chip's individuality is expressed by giving each instance its own
// FIRST_RISE_PS and HALF_PERIOD_PS. The rest value 0 and the start-up from 0
// follow the description of the PUF; the exact timing of stopping, and a
// first rise after one half period by default, are choices of this model.
//
// Ports: en (input, enable), ro_out (output, oscillator waveform).
module ring_osc #(
  parameter int unsigned HALF_PERIOD_PS = wro_puf_pkg::RO1_HALF_PS,
  parameter int unsigned FIRST_RISE_PS  = HALF_PERIOD_PS
) (
  input  logic en,
  output logic ro_out
);
  timeunit 1ps;
  timeprecision 1ps;

  initial ro_out = 1'b0;

  always begin
    wait (en == 1'b1);
    #(FIRST_RISE_PS);
    while (en) begin
      ro_out = ~ro_out;
      #(HALF_PERIOD_PS);
    end
    ro_out = 1'b0;
  end

endmodule
