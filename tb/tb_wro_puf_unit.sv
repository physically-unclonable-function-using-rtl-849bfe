// tb_wro_puf_unit -- self-checking testbench of one RO pair with its reading
// circuit.
//
// Three pairs run side by side from the same enable and system clock:
//   r12 : RO1 1.2 times slower than RO2 (t1/t2 = 1.2),
//   r11 : RO1 1.1 times slower than RO2 (t1/t2 ~ 1.1),
//   fast: RO1 faster than RO2 (t1 < t2).
// At every system clock edge each captured word is compared with the word a
// closed-form reference (tb_wro_ref_pkg) derives from the oscillator timings.
// On top of that the testbench checks the properties the design is built on:
// the first sample is 0 when t1 > t2 and 1 when t1 < t2; a full word shows
// about 2*(ID_BITS-1)*|t1-t2|/t1 bit changes, i.e. the beat pattern of the
// two periods; and the chain is filled from one run within two system clocks
// of en rising.
module tb_wro_puf_unit;
  import tb_wro_ref_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int          ID_BITS = 16;
  localparam int unsigned PERIOD  = 10000;    // 100 MHz system clock
  localparam int unsigned NU      = 3;
  // half periods {RO1, RO2}; first rise after one half period
  localparam int unsigned H1 [NU] = '{601, 553, 443};
  localparam int unsigned H2 [NU] = '{501, 503, 487};

  logic clk = 0, rst_n = 1, en = 0;
  logic [ID_BITS-1:0] id_word [NU];
  int checks = 0, failures = 0;

  for (genvar u = 0; u < NU; u++) begin : g_dut
    wro_puf_unit #(
      .ID_BITS (ID_BITS), .RO1_HALF_PS (H1[u]), .RO2_HALF_PS (H2[u])
    ) dut (
      .clk (clk), .rst_n (rst_n), .en (en), .id_word (id_word[u])
    );
  end

  always #(PERIOD/2) clk = ~clk;

  wro_pair_ref  ref_m [NU];
  logic [255:0] exp_w [NU];
  int           n_run [NU];
  int           edges_since_en = 0;
  int           fill_edge [NU];
  bit           first_checked [NU];
  int           pattern_checked [NU];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int u = 0; u < NU; u++) begin
      ref_m[u] = new(longint'(H1[u]), longint'(H1[u]), longint'(H2[u]), longint'(H2[u]));
      fill_edge[u] = -1;
      first_checked[u] = 0;
      pattern_checked[u] = 0;
    end
  end

  // reference at each capture edge, comparison half a period later
  always @(posedge clk) begin
    if (en) edges_since_en++;
    for (int u = 0; u < NU; u++) begin
      ref_m[u].advance_to($time);
      exp_w[u] = rst_n ? ref_m[u].word(ID_BITS) : '0;
      n_run[u] = ref_m[u].run_samples();
    end
  end

  always @(negedge clk) begin
    for (int u = 0; u < NU; u++) begin
      logic [255:0] got;
      got = 256'(id_word[u]);
      check(got == exp_w[u], $sformatf("unit %0d word %h expected %h", u, id_word[u],
                                       exp_w[u][ID_BITS-1:0]));
      if (en && n_run[u] >= 1 && !first_checked[u]) begin
        // oldest sample of this (first) run = first RO1 sample
        check(id_word[u][n_run[u] > ID_BITS ? ID_BITS-1 : n_run[u]-1] == (H1[u] < H2[u]),
              $sformatf("unit %0d first sample vs t1/t2", u));
        first_checked[u] = 1;
      end
      if (en && n_run[u] >= ID_BITS && fill_edge[u] < 0) begin
        fill_edge[u] = edges_since_en;
        check(fill_edge[u] <= 2, $sformatf("unit %0d filled after %0d clocks", u, fill_edge[u]));
      end
      if (en && n_run[u] >= ID_BITS + 10) begin
        // expected bit changes in a full word from the beat of the periods
        real beat;
        int  tr, lo, hi;
        beat = real'(2 * (ID_BITS - 1)) * real'(H1[u] > H2[u] ? H1[u] - H2[u] : H2[u] - H1[u]) /
               real'(H1[u]);
        tr = transitions(256'(id_word[u]), ID_BITS);
        lo = int'(beat) - 1;
        hi = int'(beat) + 2;
        check(tr >= lo && tr <= hi,
              $sformatf("unit %0d: %0d bit changes, beat predicts %.1f", u, tr, beat));
        pattern_checked[u]++;
      end
    end
  end

  initial begin
    #100 rst_n = 0;   // asynchronous reset at power-up
    #(2*PERIOD + 2245);
    rst_n = 1;
    for (int run = 0; run < 5; run++) begin
      @(posedge clk);
      #(3001 + 1000*run);
      edges_since_en = 0;
      en = 1;
      for (int u = 0; u < NU; u++) ref_m[u].start($time);
      repeat (6 + run) @(posedge clk);
      #(4003);
      en = 0;
      for (int u = 0; u < NU; u++) ref_m[u].stop($time);
      repeat (3) @(posedge clk);
    end
    #1;
    for (int u = 0; u < NU; u++) begin
      check(ref_m[u].ties == 0, $sformatf("unit %0d: %0d simultaneous edges", u, ref_m[u].ties));
      check(pattern_checked[u] > 0, $sformatf("unit %0d pattern never checked", u));
      check(first_checked[u] == 1, $sformatf("unit %0d first sample never checked", u));
    end
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
