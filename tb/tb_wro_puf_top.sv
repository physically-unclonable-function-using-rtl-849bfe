// tb_wro_puf_top -- end-to-end testbench of the PUF macro with two RO pairs
// (the two-pair arrangement used for a 128-bit ID).
//
// The macro is reset once, then measured in repeated runs: en rises at a
// fixed phase of the system clock, stays high for 9 clock cycles and falls.
// At every clock edge both pairs' words are compared with the closed-form
// reference (tb_wro_ref_pkg). The testbench also counts, and requires at
// least once, each mechanism of the design:
//   * a restart of the oscillators by en (repeated measurement),
//   * a pair with t1 > t2 whose first sample is 0 and one with t1 < t2
//     whose first sample is 1,
//   * a capture while the chain is still filling and one with a full chain,
//   * a run whose full words equal the first run's (same chip, same ID),
//   * a 128-bit ID read as 8 full 16-bit words from each pair in 8 clocks
//     (after one clock that fills the chain),
//   * chain contents held while the oscillators are stopped.
// It checks the latency too: the chain of every pair holds ID_BITS samples
// of the current run no later than the second clock edge after en rises.
module tb_wro_puf_top;
  import tb_wro_ref_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned N_PAIRS = 2;
  localparam int          ID_BITS = int'(wro_puf_pkg::ID_BITS);
  localparam int unsigned PERIOD  = 10000;   // 100 MHz system clock
  localparam int unsigned RUNS    = 5;
  localparam int unsigned WORDS   = 8;       // 8 x 16 bits = 128 bits per pair

  logic clk = 0, rst_n = 1, en = 0;
  logic [N_PAIRS*ID_BITS-1:0] id;
  int checks = 0, failures = 0;

  wro_puf_top #(.N_PAIRS(N_PAIRS)) dut (
    .clk (clk), .rst_n (rst_n), .en (en), .id (id)
  );

  always #(PERIOD/2) clk = ~clk;

  wro_pair_ref  ref_m [N_PAIRS];
  logic [255:0] exp_w [N_PAIRS];
  int           n_run [N_PAIRS];
  int           h1 [N_PAIRS];
  int           h2 [N_PAIRS];
  int           edges_since_en = 0;
  int           run_idx = -1;
  logic [ID_BITS-1:0] words [RUNS][N_PAIRS][WORDS];
  int           word_cnt [N_PAIRS];

  // mechanism counters
  int n_restart = 0, n_first0 = 0, n_first1 = 0, n_partial = 0, n_full = 0;
  int n_same_id = 0, n_long_id = 0, n_hold = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int p = 0; p < N_PAIRS; p++) begin
      h1[p] = int'(wro_puf_pkg::RO1_HALF_PS) + p * wro_puf_pkg::RO1_PAIR_STEP_PS;
      h2[p] = int'(wro_puf_pkg::RO2_HALF_PS) + p * wro_puf_pkg::RO2_PAIR_STEP_PS;
      ref_m[p] = new(longint'(h1[p]), longint'(h1[p]), longint'(h2[p]), longint'(h2[p]));
    end
  end

  always @(posedge clk) begin
    if (en) edges_since_en++;
    for (int p = 0; p < N_PAIRS; p++) begin
      ref_m[p].advance_to($time);
      exp_w[p] = rst_n ? ref_m[p].word(ID_BITS) : '0;
      n_run[p] = ref_m[p].run_samples();
    end
  end

  always @(negedge clk) begin
    for (int p = 0; p < N_PAIRS; p++) begin
      logic [ID_BITS-1:0] w;
      w = id[p*ID_BITS +: ID_BITS];
      check(w == exp_w[p][ID_BITS-1:0], $sformatf("pair %0d word %h expected %h", p, w,
                                                  exp_w[p][ID_BITS-1:0]));
      if (en && edges_since_en >= 1) begin
        if (n_run[p] < ID_BITS) n_partial++;
        else                    n_full++;
        if (edges_since_en == 2)
          check(n_run[p] >= ID_BITS, $sformatf("pair %0d chain not full after 2 clocks", p));
        if (run_idx == 0 && edges_since_en == 1 && n_run[p] >= 1) begin
          // first sample of the first run sits at the oldest filled tap
          int  k;
          logic first;
          k = n_run[p] >= ID_BITS ? ID_BITS - 1 : int'(n_run[p]) - 1;
          first = w[k];
          check(first == (h1[p] < h2[p]), $sformatf("pair %0d first sample vs t1/t2", p));
          if (first) n_first1++; else n_first0++;
        end
        // words of a full chain hold only samples of this run: those form the ID
        if (n_run[p] >= ID_BITS && word_cnt[p] < WORDS) begin
          words[run_idx][p][word_cnt[p]] = w;
          word_cnt[p]++;
        end
      end
    end
  end

  initial begin
    #100 rst_n = 0;
    #(2*PERIOD);
    rst_n = 1;
    for (int run = 0; run < RUNS; run++) begin
      @(posedge clk);
      #3001;
      run_idx = run;
      edges_since_en = 0;
      en = 1;
      if (run > 0) n_restart++;
      for (int p = 0; p < N_PAIRS; p++) begin
        ref_m[p].start($time);
        word_cnt[p] = 0;
      end
      // one clock to fill the chain, then WORDS full words
      repeat (WORDS + 1) @(posedge clk);
      #6003;
      en = 0;
      for (int p = 0; p < N_PAIRS; p++) ref_m[p].stop($time);
      // the oscillators stop within half a period; the next edge captures
      // the final chain, which must then stay put
      repeat (2) @(negedge clk);
      begin
        logic [N_PAIRS*ID_BITS-1:0] held;
        held = id;
        repeat (3) @(negedge clk);
        check(id == held, "words move while oscillators stopped");
        n_hold++;
      end
      // 128-bit ID of this run: WORDS consecutive 16-bit words per pair
      for (int p = 0; p < N_PAIRS; p++)
        check(word_cnt[p] == WORDS, $sformatf("pair %0d: %0d full words in a run", p, word_cnt[p]));
      n_long_id++;
      if (run > 0) begin
        bit same;
        same = 1;
        for (int p = 0; p < N_PAIRS; p++)
          for (int k = 0; k < WORDS; k++)
            if (words[run][p][k] != words[0][p][k]) same = 0;
        check(same, $sformatf("run %0d ID differs from run 0", run));
        if (same) n_same_id++;
      end
    end
    #1;
    for (int p = 0; p < N_PAIRS; p++)
      check(ref_m[p].ties == 0, $sformatf("pair %0d: %0d simultaneous edges", p, ref_m[p].ties));
    $display("mechanisms: restart=%0d first0=%0d first1=%0d partial=%0d full=%0d same_id=%0d long_id=%0d hold=%0d",
             n_restart, n_first0, n_first1, n_partial, n_full, n_same_id, n_long_id, n_hold);
    check(n_restart > 0, "restart never happened");
    check(n_first0  > 0, "no pair with t1 > t2");
    check(n_first1  > 0, "no pair with t1 < t2");
    check(n_partial > 0, "no capture of a filling chain");
    check(n_full    > 0, "no capture of a full chain");
    check(n_same_id > 0, "no repeated ID");
    check(n_long_id > 0, "no 128-bit read");
    check(n_hold    > 0, "no hold while stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200*PERIOD);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
