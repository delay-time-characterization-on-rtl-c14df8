// tb_timestamp_assembler: the coarse counter must advance once per clock
// from reset; a fine time presented at clock k must produce, one clock
// later, coarse = k - LATENCY and time = coarse*4 ns - fine.
module tb_timestamp_assembler;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned LAT = 4;

  logic clk = 0, rst_n = 0, fine_valid = 0;
  bin_idx_t fine_code = '0;
  logic [FINE_W-1:0] fine_fs = '0;
  logic [COARSE_W-1:0] coarse_now;
  hit_t hit;
  int checks = 0, failures = 0;

  timestamp_assembler dut (
    .clk(clk), .rst_n(rst_n), .fine_valid(fine_valid), .fine_code(fine_code),
    .fine_fs(fine_fs), .coarse_now(coarse_now), .hit(hit));

  always #2000 clk = ~clk;

  initial begin : watchdog
    #50us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned k, exp_coarse, exp_time;
  logic sent;
  initial begin
    @(negedge clk) rst_n = 1;
    k = 1;       // one rising edge has passed since reset was released
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      checks++;
      if (coarse_now != COARSE_W'(k)) begin
        failures++;
        $display("FAIL coarse %0d expected %0d", coarse_now, k);
      end
      sent = ($urandom_range(0, 2) == 0) && k >= LAT;
      fine_valid = sent;
      fine_code  = bin_idx_t'($urandom);
      fine_fs    = FINE_W'($urandom_range(0, 3_999_999));
      exp_coarse = k - LAT;
      exp_time   = exp_coarse * 4_000_000 - longint'(fine_fs);
      @(posedge clk); #1;
      k++;
      checks++;
      if (hit.valid !== sent ||
          (sent && (hit.coarse != COARSE_W'(exp_coarse) || hit.time_fs != exp_time ||
                    hit.code != fine_code || hit.fine_fs != fine_fs))) begin
        failures++;
        $display("FAIL n=%0d valid=%b coarse=%0d time=%0d expected %0d/%0d", n, hit.valid,
                 hit.coarse, hit.time_fs, exp_coarse, exp_time);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
