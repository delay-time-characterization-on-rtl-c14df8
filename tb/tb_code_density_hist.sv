// tb_code_density_hist: after the reset sweep (which must last BINS clocks)
// random hits, with runs of the same bin on consecutive clocks, are counted
// against a reference array; then every counter and the total are read
// back. A clear must zero everything, and hits offered during the sweep
// must be ignored.
module tb_code_density_hist;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned BINS = 40;

  logic clk = 0, rst_n = 0, hit_valid = 0, clear = 0, busy;
  bin_idx_t hit_code = '0, rd_addr = '0;
  logic [31:0] rd_data, total;
  int unsigned ref_cnt [BINS];
  int unsigned ref_total;
  int checks = 0, failures = 0;

  code_density_hist #(.BINS(BINS), .CNT_W(32)) dut (
    .clk(clk), .rst_n(rst_n), .hit_valid(hit_valid), .hit_code(hit_code),
    .clear(clear), .busy(busy), .rd_addr(rd_addr), .rd_data(rd_data), .total(total));

  always #2000 clk = ~clk;

  initial begin : watchdog
    #20us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  task automatic wait_sweep(string what);
    int n = 0;
    while (busy) begin
      @(posedge clk); #1;
      n++;
    end
    check(n == BINS, $sformatf("%s sweep lasted %0d clocks", what, n));
  endtask

  task automatic read_all(string what);
    for (int b = 0; b < int'(BINS); b++) begin
      @(negedge clk) rd_addr = bin_idx_t'(b);
      @(posedge clk); #1;
      check(rd_data == ref_cnt[b], $sformatf("%s bin %0d: %0d vs %0d", what, b, rd_data, ref_cnt[b]));
    end
    check(total == ref_total, $sformatf("%s total %0d vs %0d", what, total, ref_total));
  endtask

  int b;
  initial begin
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    ref_total = 0;
    @(negedge clk) rst_n = 1;
    // Hits offered during the sweep are dropped.
    hit_valid = 1; hit_code = 3;
    #1;
    wait_sweep("reset");
    @(negedge clk) hit_valid = 0;
    read_all("after reset");

    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) hit_valid = 0;
      else begin
        hit_valid = 1;
        if ($urandom_range(0, 1) == 0) hit_code = bin_idx_t'($urandom_range(0, BINS - 1));
        ref_cnt[hit_code]++;
        ref_total++;
      end
    end
    @(negedge clk) hit_valid = 0;
    read_all("after hits");

    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    ref_total = 0;
    wait_sweep("clear");
    read_all("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
