// tb_carry8_tdl: sends a rising and a falling edge through a four-cell line
// and records when each tap changes. Checks: every tap switches exactly
// once per edge, the rising and falling delays agree, each delay equals the
// line's nominal arrival time, per-stage delays stay within 0.1x..1.9x of
// the mean, the average bin is near the mean, some taps arrive out of
// order when skew is enabled, and none do on a skew-free line.
module tb_carry8_tdl;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned CELLS = 4;
  localparam int unsigned BINS  = CELLS * 8;
  localparam real MEAN = 3.6;
  localparam real SKEW = 6.0;

  logic din = 0;
  logic [BINS-1:0] taps, taps0;
  real t_rise [BINS], t_fall [BINS], t_rise0 [BINS];
  int  n_rise [BINS], n_fall [BINS];
  int checks = 0, failures = 0;

  carry8_tdl #(.CELLS(CELLS), .MEAN_STAGE_PS(MEAN), .MAX_SKEW_PS(SKEW), .SEED(7)) dut (
    .din(din), .taps(taps));
  carry8_tdl #(.CELLS(CELLS), .MEAN_STAGE_PS(MEAN), .MAX_SKEW_PS(0.0), .SEED(7)) dut0 (
    .din(din), .taps(taps0));

  for (genvar i = 0; i < BINS; i++) begin : g_mon
    always @(posedge taps[i])  begin t_rise[i] = $realtime; n_rise[i]++; end
    always @(negedge taps[i])  begin t_fall[i] = $realtime; n_fall[i]++; end
    always @(posedge taps0[i]) t_rise0[i] = $realtime;
  end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #100ns;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real t0, t1, d, prev, step, span;
  int inversions;
  initial begin
    #1000;  // let the power-up values settle, then count edges from here
    foreach (n_rise[i]) begin n_rise[i] = 0; n_fall[i] = 0; end
    t0 = $realtime;
    din = 1;
    #2000 t1 = $realtime;
    din = 0;
    #2000;
    inversions = 0;
    prev = 0.0;
    for (int i = 0; i < int'(BINS); i++) begin
      d = t_rise[i] - t0;
      check(n_rise[i] == 1 && n_fall[i] == 1, $sformatf("tap %0d switched %0d/%0d times", i, n_rise[i], n_fall[i]));
      check((t_fall[i] - t1 - d) < 0.002 && (t_fall[i] - t1 - d) > -0.002, $sformatf("tap %0d rise/fall mismatch", i));
      check((d - tdl_arrival_ps(7, MEAN, SKEW, i)) < 0.002 && (d - tdl_arrival_ps(7, MEAN, SKEW, i)) > -0.002,
            $sformatf("tap %0d arrival %f vs %f", i, d, tdl_arrival_ps(7, MEAN, SKEW, i)));
      // skew-free line: strictly increasing, each step within the stage range
      step = t_rise0[i] - t0 - prev;
      check(step > 0.1 * MEAN - 0.002 && step < 1.9 * MEAN + 0.002, $sformatf("stage %0d delay %f", i, step));
      prev = t_rise0[i] - t0;
      // with skew: the tap may trail its carry by up to SKEW
      check(d >= prev - 0.002 && d <= prev + SKEW + 0.002, $sformatf("tap %0d skew %f", i, d - prev));
      if (i > 0 && t_rise[i] < t_rise[i-1]) inversions++;
    end
    span = prev;
    check(span / BINS > 0.6 * MEAN && span / BINS < 1.4 * MEAN, $sformatf("mean stage %f", span / BINS));
    check(inversions > 0, "no out-of-order taps with skew");
    $display("taps out of order: %0d of %0d, line span %f ps", inversions, BINS, span);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
