// tb_sample_shift_reg -- self-checking testbench of the RO2-clocked sampling
// chain.
//
// Drives the chain with an irregular clock (standing in for RO2) and random
// data, keeps its own history of the sampled bits and checks after every
// edge that tap i holds the i-th newest sample. Also checks that the
// asynchronous reset clears all taps at once and that the chain holds still
// when the clock stops (oscillator disabled).
module tb_sample_shift_reg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned ID_BITS = 16;

  logic               ro_clk = 0;
  logic               rst_n  = 1;
  logic               d_in   = 0;
  logic [ID_BITS-1:0] taps;
  logic [ID_BITS-1:0] model;
  int checks = 0, failures = 0;

  sample_shift_reg #(.ID_BITS(ID_BITS)) dut (
    .ro_clk (ro_clk), .rst_n (rst_n), .d_in (d_in), .taps (taps)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t: taps=%h model=%h", what, $time, taps, model);
    end
  endtask

  initial begin
    model = '0;
    #100 rst_n = 0;   // asynchronous reset at power-up
    #900;
    check(taps == '0, "reset value");
    rst_n = 1;
    #300;
    for (int k = 0; k < 200; k++) begin
      d_in = 1'($urandom);
      #(200 + $urandom % 300);
      ro_clk = 1;
      model = {model[ID_BITS-2:0], d_in};
      #1;
      check(taps == model, "shift");
      check(taps[0] == d_in, "newest sample in tap 0");
      #(200 + $urandom % 300);
      ro_clk = 0;
      // data changing while the clock is low must not move the chain
      d_in = ~d_in;
      #1;
      check(taps == model, "hold while clock low");
      if (k == 100) begin
        #5000;
        check(taps == model, "hold while clock stopped");
      end
    end
    rst_n = 0;
    #1;
    check(taps == '0, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
