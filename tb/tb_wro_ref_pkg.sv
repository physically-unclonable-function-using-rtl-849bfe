// tb_wro_ref_pkg -- independent reference for testbenches of the waveform
// RO-PUF.
//
// wro_pair_ref computes, from the oscillator timings alone, which value RO1
// has at every rising edge of RO2 and so which bits the sampling chain and
// the capture register must hold at any system-clock edge. It works with
// times in ps and closed-form oscillator waveforms instead of simulating
// the oscillators: an oscillator started at t_en with first-rise delay F and
// half period H is 1 at time t when t - t_en >= F and floor((t-t_en-F)/H) is
// even. Edges that coincide exactly (a sampling race in the simulator) are
// counted as ties so that a testbench can reject such timings.
package tb_wro_ref_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  class wro_pair_ref;
    longint f1, h1, f2, h2;
    bit     samples[$];          // every RO1 sample since reset, oldest first
    longint t_en;                // start of the current run
    longint t_off;               // end of the current run (en fell)
    bit     running;
    longint next_m;              // index of the next RO2 rising edge
    int     ties;

    function new(longint f1, longint h1, longint f2, longint h2);
      this.f1 = f1; this.h1 = h1; this.f2 = f2; this.h2 = h2;
      samples = {};
      running = 0;
      ties    = 0;
      t_off   = 0;
    endfunction

    static function bit osc_value(longint t, longint t0, longint f, longint h);
      longint dt = t - t0;
      if (dt < f) return 1'b0;
      return ((dt - f) / h) % 2 == 0;
    endfunction

    static function bit osc_edge(longint t, longint t0, longint f, longint h);
      longint dt = t - t0;
      return dt >= f && (dt - f) % h == 0;
    endfunction

    function void reset();
      samples = {};
    endfunction

    function void start(longint t);
      t_en    = t;
      t_off   = 64'h7fff_ffff_ffff_ffff;
      running = 1;
      next_m  = 0;
    endfunction

    function void stop(longint t);
      t_off = t;
    endfunction

    // Record all RO2 rising edges strictly before t.
    function void advance_to(longint t);
      longint r;
      if (!running) return;
      forever begin
        r = t_en + f2 + 2 * h2 * next_m;
        if (r == t || r == t_off) ties++;
        if (r >= t || r >= t_off) break;
        if (osc_edge(r, t_en, f1, h1)) ties++;
        samples.push_back(osc_value(r, t_en, f1, h1));
        next_m++;
      end
      if (t_off <= t) running = 0;
    endfunction

    // Number of RO2 edges seen in the current run.
    function int run_samples();
      return int'(next_m);
    endfunction

    // The chain contents: bit i is the i-th newest sample, 0 beyond.
    function logic [255:0] word(int bits);
      logic [255:0] w = '0;
      int n = samples.size();
      for (int i = 0; i < bits && i < n; i++) w[i] = samples[n-1-i];
      return w;
    endfunction
  endclass

  // Number of positions where adjacent bits differ.
  function automatic int transitions(logic [255:0] w, int bits);
    int c = 0;
    for (int i = 1; i < bits; i++) if (w[i] != w[i-1]) c++;
    return c;
  endfunction

endpackage
