// tb_wro_puf_eval -- the chip-population evaluation run on ten modelled chips.
//
// Ten instances of the PUF macro (one RO pair, 16-bit words) stand for ten
// chips. Each chip gets its own oscillator half periods, a spread of a few
// per cent around 500 ps that stands in for process variation; the spread
// is this testbench's choice, so the metrics it prints describe the model,
// not silicon. Every chip is measured T times by pulsing en. The ID of a
// measurement is the first full word (second clock edge after en rises).
// From these IDs the testbench computes the usual PUF figures of merit:
//   uniformity  = mean over chips and runs of (ones in the ID) / L,
//   reliability = 1 - mean over runs of HD(R_i, R'_i,t) / L, per chip,
//                 R_i being the chip's most frequent ID,
//   uniqueness  = mean over chip pairs of HD(R_i, R_j) / L,
// with L = 16. Checks: every word against the closed-form reference; the
// metrics computed from the macro's outputs equal those computed from the
// reference; the noise-free model is fully reliable; no two chips share an
// ID in this population.
module tb_wro_puf_eval;
  import tb_wro_ref_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int NCHIP  = 10;
  localparam int L      = 16;
  localparam int T      = 20;
  localparam int PERIOD = 10000;
  localparam int unsigned H1 [NCHIP] = '{503, 489, 512, 497, 478, 521, 494, 507, 486, 515};
  localparam int unsigned H2 [NCHIP] = '{491, 508, 483, 519, 502, 476, 511, 523, 517, 488};

  logic clk = 0, rst_n = 1, en = 0;
  logic [L-1:0] id [NCHIP];
  int checks = 0, failures = 0;

  for (genvar c = 0; c < NCHIP; c++) begin : g_chip
    wro_puf_top #(.N_PAIRS(1), .ID_BITS(L), .RO1_HALF_PS(H1[c]), .RO2_HALF_PS(H2[c])) chip (
      .clk (clk), .rst_n (rst_n), .en (en), .id (id[c])
    );
  end

  always #(PERIOD/2) clk = ~clk;

  wro_pair_ref  ref_m [NCHIP];
  logic [L-1:0] got  [NCHIP][T];
  logic [L-1:0] want [NCHIP][T];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int popcount(logic [L-1:0] w);
    int n = 0;
    for (int i = 0; i < L; i++) n += int'(w[i]);
    return n;
  endfunction

  // most frequent ID of one chip
  function automatic logic [L-1:0] mode_id(logic [L-1:0] ids [T]);
    int best = 0;
    logic [L-1:0] r = ids[0];
    for (int a = 0; a < T; a++) begin
      int n = 0;
      for (int b = 0; b < T; b++) if (ids[b] == ids[a]) n++;
      if (n > best) begin
        best = n;
        r = ids[a];
      end
    end
    return r;
  endfunction

  // uniformity, mean reliability and uniqueness in units of 1e-4 (0.01 %)
  task automatic metrics(input logic [L-1:0] ids [NCHIP][T], output int unif,
                         output int rel, output int uniq);
    logic [L-1:0] r [NCHIP];
    int ones = 0, hd_intra = 0, hd_inter = 0;
    for (int c = 0; c < NCHIP; c++) begin
      r[c] = mode_id(ids[c]);
      for (int t = 0; t < T; t++) begin
        ones     += popcount(ids[c][t]);
        hd_intra += popcount(ids[c][t] ^ r[c]);
      end
    end
    for (int i = 0; i < NCHIP - 1; i++)
      for (int j = i + 1; j < NCHIP; j++) hd_inter += popcount(r[i] ^ r[j]);
    unif = (ones * 10000 / (NCHIP * T * L));
    rel  = 10000 - (hd_intra * 10000 / (NCHIP * T * L));
    uniq = (hd_inter * 2 * 10000 / (NCHIP * (NCHIP - 1) * L));
  endtask

  initial begin
    for (int c = 0; c < NCHIP; c++)
      ref_m[c] = new(longint'(H1[c]), longint'(H1[c]), longint'(H2[c]), longint'(H2[c]));
  end

  initial begin
    int u_g, r_g, q_g, u_w, r_w, q_w;
    logic [L-1:0] r [NCHIP];
    #100 rst_n = 0;
    #(2*PERIOD);
    rst_n = 1;
    for (int t = 0; t < T; t++) begin
      @(posedge clk);
      #3001;
      en = 1;
      for (int c = 0; c < NCHIP; c++) ref_m[c].start($time);
      repeat (2) @(posedge clk);
      for (int c = 0; c < NCHIP; c++) begin
        ref_m[c].advance_to($time);
        check(ref_m[c].run_samples() >= L, $sformatf("chip %0d chain not full", c));
        want[c][t] = L'(ref_m[c].word(L));
      end
      @(negedge clk);
      for (int c = 0; c < NCHIP; c++) begin
        got[c][t] = id[c];
        check(got[c][t] == want[c][t], $sformatf("chip %0d run %0d ID %h expected %h", c, t,
                                                 got[c][t], want[c][t]));
      end
      #1003;
      en = 0;
      for (int c = 0; c < NCHIP; c++) ref_m[c].stop($time);
      repeat (2) @(posedge clk);
      for (int c = 0; c < NCHIP; c++) ref_m[c].advance_to($time);
    end
    metrics(got,  u_g, r_g, q_g);
    metrics(want, u_w, r_w, q_w);
    $display("uniformity %0d.%02d %%  reliability %0d.%02d %%  uniqueness %0d.%02d %%",
             u_g / 100, u_g % 100, r_g / 100, r_g % 100, q_g / 100, q_g % 100);
    check(u_g == u_w && r_g == r_w && q_g == q_w, "metrics differ from reference");
    check(r_g == 10000, "noise-free model not fully reliable");
    for (int c = 0; c < NCHIP; c++) r[c] = mode_id(got[c]);
    for (int i = 0; i < NCHIP - 1; i++)
      for (int j = i + 1; j < NCHIP; j++)
        check(r[i] != r[j], $sformatf("chips %0d and %0d share an ID", i, j));
    for (int c = 0; c < NCHIP; c++)
      check(ref_m[c].ties == 0, $sformatf("chip %0d: %0d simultaneous edges", c, ref_m[c].ties));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10*T*PERIOD);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
