// tb_tdc_top: end-to-end run of the converter at reduced size (four lines
// of four CARRY8 cells, 32 taps each), two copies side by side on the same
// START/STOP and clock:
//   raw - default maps: taps in physical order, lines spread round-robin
//         into 100 merged bins (no bin resorting, no interleave calibration);
//   cal - bin order and interleave map computed here from the true tap
//         arrival times of the line model, the way the off-line calibration
//         would find them: each line sorted by arrival (resorting), all lines
//         merged by start time, bins narrower than 0.2 ps dropped; the
//         bin-to-time table is then loaded with each merged bin's start time.
// Each trial launches one pulse a random 0..150 ps before a sampling edge
// (a code density test: uniform over the line). For every trial the
// expected thermometer code of each copy is predicted from the arrival
// times and run through a reference encoder; the codes, the clock at which
// they appear, the histogram counts, and the calibrated timestamps
// (coarse*4 ns - t[n], and its error against the true START time) are
// checked. Mechanisms counted, each must occur: hits, missing codes in the
// raw copy, bubbles rejected by the run-of-ones rule, narrow bins dropped,
// time-interval pairs measured, histogram clear.
module tb_tdc_top;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned L      = 4;
  localparam int unsigned C      = 4;
  localparam int unsigned B      = C * 8;
  localparam int unsigned TOT    = L * B;
  localparam int unsigned MU     = 100;        // merged bins, raw copy
  localparam int unsigned RUN    = 2;
  localparam real         MEAN   = 3.6;
  localparam real         SKEW   = 6.0;
  localparam real         FILTER = 0.2;        // ps
  localparam int          TRIALS = 6000;

  // ---- calibration, as constant functions --------------------------------
  function automatic real arr(int unsigned line, int unsigned bin);
    return tdl_arrival_ps(line + 1, MEAN, SKEW, bin);
  endfunction

  // rank r of line l -> physical bin
  function automatic bin_idx_t [L-1:0][B-1:0] cal_order();
    bin_idx_t [L-1:0][B-1:0] o;
    int unsigned tmp;
    for (int unsigned l = 0; l < L; l++) begin
      for (int unsigned b = 0; b < B; b++) o[l][b] = bin_idx_t'(b);
      for (int unsigned i = 0; i < B; i++)
        for (int unsigned j = i + 1; j < B; j++)
          if (arr(l, o[l][j]) < arr(l, o[l][i])) begin
            tmp = o[l][i]; o[l][i] = o[l][j]; o[l][j] = bin_idx_t'(tmp);
          end
    end
    return o;
  endfunction

  // all (line, rank) pairs sorted by arrival, as line*B + rank
  function automatic bin_idx_t [TOT-1:0] global_sort();
    bin_idx_t [L-1:0][B-1:0] o = cal_order();
    bin_idx_t [TOT-1:0] g;
    int unsigned tmp;
    for (int unsigned k = 0; k < TOT; k++) g[k] = bin_idx_t'(k);
    for (int unsigned i = 0; i < TOT; i++)
      for (int unsigned j = i + 1; j < TOT; j++)
        if (arr(g[j] / B, o[g[j] / B][g[j] % B]) < arr(g[i] / B, o[g[i] / B][g[i] % B])) begin
          tmp = g[i]; g[i] = g[j]; g[j] = bin_idx_t'(tmp);
        end
    return g;
  endfunction

  function automatic real sorted_t(bin_idx_t [TOT-1:0] g, bin_idx_t [L-1:0][B-1:0] o, int unsigned k);
    return arr(g[k] / B, o[g[k] / B][g[k] % B]);
  endfunction

  function automatic logic keep(bin_idx_t [TOT-1:0] g, bin_idx_t [L-1:0][B-1:0] o, int unsigned k);
    if (k == TOT - 1) return 1'b1;
    return (sorted_t(g, o, k + 1) - sorted_t(g, o, k)) >= FILTER;
  endfunction

  function automatic int unsigned cal_merged();
    bin_idx_t [TOT-1:0] g = global_sort();
    bin_idx_t [L-1:0][B-1:0] o = cal_order();
    int unsigned n = 0;
    for (int unsigned k = 0; k < TOT; k++) if (keep(g, o, k)) n++;
    return n;
  endfunction

  function automatic iti_src_t [TOT-1:0] cal_map();
    bin_idx_t [TOT-1:0] g = global_sort();
    bin_idx_t [L-1:0][B-1:0] o = cal_order();
    iti_src_t [TOT-1:0] m = '0;
    int unsigned n = 0;
    for (int unsigned k = 0; k < TOT; k++)
      if (keep(g, o, k)) begin
        m[n] = '{line: 4'(g[k] / B), bin: bin_idx_t'(g[k] % B)};
        n++;
      end
    return m;
  endfunction

  localparam bin_idx_t [L-1:0][B-1:0] ORDER = cal_order();
  localparam int unsigned             MC    = cal_merged();
  localparam iti_src_t [TOT-1:0]      MAPF  = cal_map();
  localparam iti_src_t [MC-1:0]       MAP   = MAPF[MC-1:0];

  // ---- the two copies ------------------------------------------------------
  logic clk = 0, rst_n = 0, start = 0, stop = 0;
  logic lut_wr_en = 0;
  bin_idx_t lut_wr_addr = '0;
  logic [FINE_W-1:0] lut_wr_data = '0;
  logic hist_clear = 0;
  bin_idx_t hist_rd_addr = '0;

  logic              r_busy, c_busy, r_valid, c_valid;
  logic [31:0]       r_rd, c_rd, r_total, c_total;
  bin_idx_t          r_code, c_code;
  logic [COARSE_W-1:0] r_coarse, c_coarse;
  hit_t              r_hit, c_hit;

  tdc_top #(.NUM_TDL(L), .CELLS(C), .MERGED(MU), .ONES_RUN(RUN),
            .MEAN_STAGE_PS(MEAN), .MAX_SKEW_PS(SKEW)) u_raw (
    .clk(clk), .rst_n(rst_n), .start(start), .stop(stop),
    .lut_wr_en(1'b0), .lut_wr_addr('0), .lut_wr_data('0),
    .hist_clear(hist_clear), .hist_busy(r_busy), .hist_rd_addr(hist_rd_addr),
    .hist_rd_data(r_rd), .hist_total(r_total),
    .enc_valid(r_valid), .enc_code(r_code), .coarse_now(r_coarse), .hit(r_hit));

  tdc_top #(.NUM_TDL(L), .CELLS(C), .MERGED(MC), .ONES_RUN(RUN),
            .MEAN_STAGE_PS(MEAN), .MAX_SKEW_PS(SKEW),
            .RESORT_ORDER(ORDER), .ITI_MAP(MAP)) u_cal (
    .clk(clk), .rst_n(rst_n), .start(start), .stop(stop),
    .lut_wr_en(lut_wr_en), .lut_wr_addr(lut_wr_addr), .lut_wr_data(lut_wr_data),
    .hist_clear(hist_clear), .hist_busy(c_busy), .hist_rd_addr(hist_rd_addr),
    .hist_rd_data(c_rd), .hist_total(c_total),
    .enc_valid(c_valid), .enc_code(c_code), .coarse_now(c_coarse), .hit(c_hit));

  always #2000 clk = ~clk;

  // ---- reference model -----------------------------------------------------
  real t_raw [MU];      // arrival of each raw merged bin
  real t_cal [MC];      // start time of each calibrated merged bin
  int unsigned cnt_raw [MU], cnt_cal [MC];
  int checks = 0, failures = 0;
  int n_hits_raw = 0, n_hits_cal = 0, n_bubbles = 0, n_ti = 0, n_clear = 0;

  function automatic int ref_encode(logic [TOT-1:0] v, int unsigned n, int unsigned run, output int naive);
    logic above, ok;
    naive = -1;
    for (int p = 0; p < int'(n); p++) begin
      above = (p + 1 < int'(n)) ? v[p+1] : 1'b1;
      ok = ~above;
      if (naive < 0 && ~above && v[p]) naive = p;
      for (int k = 0; k < int'(run); k++) ok &= (p - k < 0) ? 1'b1 : v[p-k];
      if (ok) return p;
    end
    return -1;
  endfunction

  function automatic real min_dist(real t);
    real d = 1.0e9;
    for (int j = 0; j < int'(MU); j++) if ((t - t_raw[j]) ** 2 < d * d) d = (t >= t_raw[j]) ? t - t_raw[j] : t_raw[j] - t;
    for (int j = 0; j < int'(MC); j++) if ((t - t_cal[j]) ** 2 < d * d) d = (t >= t_cal[j]) ? t - t_cal[j] : t_cal[j] - t;
    return d;
  endfunction

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  initial begin : watchdog
    #(TRIALS * 20ns + 200us);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real t_edge0, t_edge, travel, t_start, err, prev_err, sum_sq;
  logic [TOT-1:0] v_raw, v_cal;
  int exp_raw, exp_cal, naive, dummy, missing_raw, missing_cal;
  longint unsigned k_coarse, exp_time;
  logic have_prev;

  initial begin
    begin
      bin_idx_t [L-1:0][B-1:0] o = cal_order();
      bin_idx_t [TOT-1:0] g = global_sort();
      int unsigned n = 0;
      longint unsigned gi;
      for (int unsigned j = 0; j < MU; j++) begin
        gi = (longint'(j) * TOT) / MU;
        t_raw[j] = arr(int'(gi % L), int'(gi / L));
      end
      for (int unsigned k = 0; k < TOT; k++)
        if (keep(g, o, k)) begin t_cal[n] = sorted_t(g, o, k); n++; end
    end
    $display("merged bins: raw %0d, calibrated %0d of %0d (%0d narrow bins dropped)", MU, MC, TOT, TOT - MC);
    foreach (cnt_raw[i]) cnt_raw[i] = 0;
    foreach (cnt_cal[i]) cnt_cal[i] = 0;

    // reset, histogram sweep, table load
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(posedge clk) t_edge0 = $realtime;       // coarse counter value 0 here
    for (int unsigned n = 0; n < MC; n++) begin
      @(negedge clk);
      lut_wr_en = 1; lut_wr_addr = bin_idx_t'(n);
      lut_wr_data = FINE_W'(longint'(t_cal[n] * 1000.0));   // rounds to nearest fs
    end
    @(negedge clk) lut_wr_en = 0;
    while (r_busy || c_busy) @(negedge clk);

    have_prev = 0; sum_sq = 0.0;
    for (int trial = 0; trial < TRIALS; trial++) begin
      @(negedge clk);
      travel = real'($urandom_range(1, 150_000)) / 1000.0;   // ps, fs steps
      // keep clear of an exact tie between a tap and the clock edge
      while (min_dist(travel) < 0.05) travel += 0.07;
      #(2000.0 - travel) start = 1;
      t_start = $realtime;
      #0.5 start = 0;
      @(posedge clk) t_edge = $realtime;
      fork begin #1000 stop = 1; #0.5 stop = 0; end join_none
      for (int j = 0; j < int'(MU); j++) v_raw[j] = (t_raw[j] <= travel);
      for (int j = 0; j < int'(MC); j++) v_cal[j] = (t_cal[j] <= travel);
      exp_raw = ref_encode(v_raw, MU, RUN, naive);
      if (naive != exp_raw) n_bubbles++;   // a lone 1 ahead of the edge was ignored
      exp_cal = ref_encode(v_cal, MC, RUN, dummy);
      // after edges E .. E+4 (pass e looks at the state after edge E+e)
      for (int e = 0; e <= 4; e++) begin
        @(negedge clk);
        if (e == 2) begin
          check(r_valid == (exp_raw >= 0) && (exp_raw < 0 || int'(r_code) == exp_raw),
                $sformatf("raw code %0d/%0d expected %0d", r_valid, r_code, exp_raw));
          check(c_valid == (exp_cal >= 0) && (exp_cal < 0 || int'(c_code) == exp_cal),
                $sformatf("cal code %0d/%0d expected %0d", c_valid, c_code, exp_cal));
        end else begin
          check(!r_valid && !c_valid, $sformatf("code at wrong clock (E+%0d)", e));
        end
        if (e == 4) begin
          check(c_hit.valid == (exp_cal >= 0), "timestamp valid");
          if (exp_cal >= 0) begin
            k_coarse = longint'((t_edge - t_edge0) / 4000.0);   // exact multiple
            exp_time = k_coarse * 4_000_000 - longint'(t_cal[exp_cal] * 1000.0);
            check(c_hit.coarse == COARSE_W'(k_coarse) && c_hit.time_fs == exp_time,
                  $sformatf("timestamp %0d expected %0d", c_hit.time_fs, exp_time));
            // error against the true start (ps): within the bin just hit
            err = real'(c_hit.time_fs) / 1000.0 - (t_start - t_edge0);
            check(err > -0.06 && err < ((exp_cal + 1 < int'(MC)) ? t_cal[exp_cal+1] - t_cal[exp_cal] : 10.0) + 0.06,
                  $sformatf("timestamp error %f ps", err));
            if (have_prev) begin
              sum_sq += (err - prev_err) ** 2;
              n_ti++;
            end
            prev_err = err; have_prev = 1;
          end
        end
      end
      if (exp_raw >= 0) begin cnt_raw[exp_raw]++; n_hits_raw++; end
      if (exp_cal >= 0) begin cnt_cal[exp_cal]++; n_hits_cal++; end
    end

    // code density test readout
    missing_raw = 0; missing_cal = 0;
    check(r_total == n_hits_raw && c_total == n_hits_cal, "histogram totals");
    for (int n = 0; n < int'(MU); n++) begin
      @(negedge clk) hist_rd_addr = bin_idx_t'(n);
      @(posedge clk); #1;
      check(r_rd == cnt_raw[n], $sformatf("raw histogram bin %0d: %0d vs %0d", n, r_rd, cnt_raw[n]));
      if (n < int'(MU) - 1 && r_rd == 0) missing_raw++;
      if (n < int'(MC)) begin
        check(c_rd == cnt_cal[n], $sformatf("cal histogram bin %0d: %0d vs %0d", n, c_rd, cnt_cal[n]));
        if (n < int'(MC) - 1 && c_rd == 0) missing_cal++;
      end
    end
    for (int n = int'(MU); n < int'(MC); n++) begin
      @(negedge clk) hist_rd_addr = bin_idx_t'(n);
      @(posedge clk); #1;
      check(c_rd == cnt_cal[n], $sformatf("cal histogram bin %0d", n));
      if (n < int'(MC) - 1 && c_rd == 0) missing_cal++;
    end
    $display("missing codes: raw %0d of %0d, calibrated %0d of %0d", missing_raw, MU - 1, missing_cal, MC - 1);
    check(missing_cal == 0, "calibrated line has missing codes");
    $display("time-interval pairs %0d, RMS interval error %f ps", n_ti, (n_ti > 0) ? $sqrt(sum_sq / n_ti) : 0.0);

    // histogram clear
    @(negedge clk) hist_clear = 1;
    @(negedge clk) hist_clear = 0;
    while (r_busy || c_busy) @(negedge clk);
    @(negedge clk) hist_rd_addr = 0;
    @(posedge clk); #1;
    check(r_total == 0 && c_total == 0 && r_rd == 0 && c_rd == 0, "histogram cleared");
    n_clear++;

    $display("mechanisms: raw hits %0d, cal hits %0d, raw missing codes %0d, bubbles rejected %0d, narrow bins dropped %0d, TI pairs %0d, clears %0d",
             n_hits_raw, n_hits_cal, missing_raw, n_bubbles, TOT - MC, n_ti, n_clear);
    check(n_hits_raw > 0,   "mechanism never happened: raw hits");
    check(n_hits_cal > 0,   "mechanism never happened: calibrated hits");
    check(missing_raw > 0,  "mechanism never happened: missing codes without calibration");
    check(n_bubbles > 0,    "mechanism never happened: bubble rejected");
    check(TOT - MC > 0,     "mechanism never happened: narrow bin dropped");
    check(n_ti > 0,         "mechanism never happened: time interval");
    check(n_clear > 0,      "mechanism never happened: histogram clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
