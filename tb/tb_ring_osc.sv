// tb_ring_osc -- self-checking testbench of the ring-oscillator model.
//
// Starts and stops the oscillator several times and checks, at every output
// change, its time against the closed-form waveform: rest value 0 while en is
// low, first rising edge FIRST_RISE_PS after en rises, then a change every
// HALF_PERIOD_PS, and return to 0 within one half period after en falls.
module tb_ring_osc;
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint HALF  = 437;
  localparam longint FIRST = 611;

  logic en;
  logic ro_out;
  int   checks   = 0;
  int   failures = 0;

  ring_osc #(.HALF_PERIOD_PS(32'(HALF)), .FIRST_RISE_PS(32'(FIRST))) dut (
    .en     (en),
    .ro_out (ro_out)
  );

  longint t_en;
  longint t_fall;
  bit     running = 0;
  longint n_edges;
  logic   prev_out;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Every change of the output must land on the predicted grid.
  always @(ro_out) begin
    longint dt;
    dt = $time - t_en;
    if (running) begin
      check(dt >= FIRST && (dt - FIRST) % HALF == 0, "edge off the oscillator grid");
      check(ro_out == (((dt - FIRST) / HALF) % 2 == 0), "edge has wrong polarity");
      n_edges++;
    end else begin
      // after en fell: only a return to 0 within one half period is allowed
      check(ro_out == 1'b0, "rising edge while disabled");
      check($time - t_fall <= HALF, "late stop");
    end
  end

  initial begin
    en = 0;
    #5000;
    check(ro_out == 1'b0, "rest value while disabled");
    for (int run = 0; run < 4; run++) begin
      longint len;
      len = 20000 + run * 3001;
      t_en = $time;
      n_edges = 0;
      running = 1;
      en = 1;
      #(FIRST - 1);
      check(ro_out == 1'b0, "output rose before FIRST_RISE_PS");
      #(len - FIRST + 1);
      running = 0;
      t_fall = $time;
      en = 0;
      // the number of output changes while enabled is known in closed form
      check(n_edges == (len - FIRST) / HALF + 1 ||
            ((len - FIRST) % HALF == 0 && n_edges == (len - FIRST) / HALF),
            "wrong number of edges");
      #(HALF + 1);
      check(ro_out == 1'b0, "output not back at 0 after stop");
      #4000;
      check(ro_out == 1'b0, "output moved while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
