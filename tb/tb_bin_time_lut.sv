// tb_bin_time_lut: the power-up table must hold t[n] = n*T_CLK/BINS; after
// writing the start times of a made-up set of bin widths, every lookup
// must return t[n] = W[0]+..+W[n-1] one clock later, with its code.
module tb_bin_time_lut;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned BINS = 25;

  logic clk = 0, rst_n = 0, wr_en = 0, in_valid = 0, out_valid;
  bin_idx_t wr_addr = '0, in_code = '0, out_code;
  logic [FINE_W-1:0] wr_data = '0, out_fine_fs;
  longint unsigned t_ref [BINS];
  int checks = 0, failures = 0;

  bin_time_lut #(.BINS(BINS)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .in_valid(in_valid), .in_code(in_code), .out_valid(out_valid), .out_code(out_code),
    .out_fine_fs(out_fine_fs));

  always #2000 clk = ~clk;

  initial begin : watchdog
    #20us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic lookup_all(string what);
    for (int n = 0; n < int'(BINS); n++) begin
      @(negedge clk) begin in_valid = 1; in_code = bin_idx_t'(n); end
      @(posedge clk); #1;
      checks++;
      if (!(out_valid && out_code == bin_idx_t'(n) && longint'(out_fine_fs) == t_ref[n])) begin
        failures++;
        $display("FAIL %s bin %0d: valid=%b code=%0d t=%0d expected %0d", what, n,
                 out_valid, out_code, out_fine_fs, t_ref[n]);
      end
      @(negedge clk) in_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL %s: valid without lookup", what); end
    end
  endtask

  longint unsigned acc;
  initial begin
    // 4 ns / 25 bins = 160 ps per bin
    for (int n = 0; n < int'(BINS); n++) t_ref[n] = longint'(n) * 160_000;
    @(negedge clk) rst_n = 1;
    lookup_all("power-up");
    acc = 0;
    for (int n = 0; n < int'(BINS); n++) begin
      t_ref[n] = acc;
      acc += 1_000 + ((n * 7919) % 300_000);   // widths 1 fs .. 0.3 ns
      @(negedge clk) begin wr_en = 1; wr_addr = bin_idx_t'(n); wr_data = FINE_W'(t_ref[n]); end
    end
    @(negedge clk) wr_en = 0;
    lookup_all("calibrated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
