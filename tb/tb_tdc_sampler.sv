// tb_tdc_sampler: random tap patterns; the register must show the pattern
// present at the last rising clock edge, and keep it until the next one.
module tb_tdc_sampler;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned BINS = 40;
  logic clk = 0;
  logic [BINS-1:0] taps = '0, tc, at_edge;
  int checks = 0, failures = 0;

  tdc_sampler #(.BINS(BINS)) dut (.clk(clk), .taps(taps), .tc(tc));

  always #2000 clk = ~clk;

  initial begin : watchdog
    #2us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      taps = {$urandom, $urandom};
      @(posedge clk);
      at_edge = taps;
      #10 taps = ~taps;              // change after the edge: must not show
      #100;
      checks++;
      if (tc !== at_edge) begin
        failures++;
        $display("FAIL n=%0d tc=%h expected %h", n, tc, at_edge);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
