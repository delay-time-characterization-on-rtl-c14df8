// tb_pulse_gen: checks that the shaped pulse is high exactly from each
// START edge to the following STOP edge, over random intervals, and that
// reset clears it.
module tb_pulse_gen;
  timeunit 1ps;
  timeprecision 1fs;

  logic start = 0, stop = 0, rst_n = 0, pulse;
  int checks = 0, failures = 0;

  pulse_gen dut (.start(start), .stop(stop), .rst_n(rst_n), .pulse(pulse));

  task automatic expect_level(logic exp, string what);
    checks++;
    if (pulse !== exp) begin
      failures++;
      $display("FAIL %s: pulse=%b expected %b at %t", what, pulse, exp, $realtime);
    end
  endtask

  initial begin : watchdog
    #1us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10 expect_level(0, "in reset");
    rst_n = 1;
    #10 expect_level(0, "after reset");
    for (int n = 0; n < 40; n++) begin
      int unsigned width = 5 + $urandom_range(0, 200);
      int unsigned gap   = 5 + $urandom_range(0, 100);
      start = 1; #1 start = 0;
      #2 expect_level(1, "after START");
      #(width) expect_level(1, "before STOP");
      stop = 1; #1 stop = 0;
      #2 expect_level(0, "after STOP");
      #(gap) expect_level(0, "between pulses");
    end
    rst_n = 0;
    start = 1; #1 start = 0;
    #2 expect_level(0, "START during reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
