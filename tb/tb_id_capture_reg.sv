// tb_id_capture_reg -- self-checking testbench of the system-clock capture row.
//
// Changes the taps at random times between clock edges and checks that the
// output copies exactly the taps present at each rising clk edge, holds
// between edges, and clears on the asynchronous reset.
module tb_id_capture_reg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned ID_BITS = 16;
  localparam int unsigned PERIOD  = 10000;

  logic               clk   = 0;
  logic               rst_n = 1;
  logic [ID_BITS-1:0] taps  = '0;
  logic [ID_BITS-1:0] id_word;
  logic [ID_BITS-1:0] expected = '0;
  int checks = 0, failures = 0;
  int cycles = 0;

  id_capture_reg #(.ID_BITS(ID_BITS)) dut (
    .clk (clk), .rst_n (rst_n), .taps (taps), .id_word (id_word)
  );

  always #(PERIOD/2) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t: id_word=%h expected=%h", what, $time, id_word, expected);
    end
  endtask

  // taps change several times per clock period, like an RO-clocked chain
  initial begin
    #3;   // keeps every change off the clock edges (multiples of 5000 ps)
    forever begin
      #(10 * (70 + $urandom % 40));
      taps = ID_BITS'($urandom);
    end
  end

  always @(posedge clk) begin
    cycles++;
    if (rst_n) expected = taps;
    #1;
    check(id_word == expected, "capture");
    #(PERIOD/2);
    check(id_word == expected, "hold between edges");
  end

  initial begin
    #100 rst_n = 0;   // asynchronous reset at power-up
    #(3*PERIOD + 1134);
    check(id_word == '0, "reset value");
    rst_n = 1;
    repeat (200) @(posedge clk);
    #(PERIOD/4);
    rst_n = 0;
    #1;
    check(id_word == '0, "asynchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1000*PERIOD);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
