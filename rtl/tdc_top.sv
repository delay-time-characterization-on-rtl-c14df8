// tdc_top: time-to-digital converter made of four interleaved CARRY8
// tapped delay lines, one priority encoder and a timestamp path.
//
// Data flow, one hit per sampling clock at most:
//   start/stop -> pulse_gen -> NUM_TDL x carry8_tdl (timing model)
//     -> NUM_TDL x tdc_sampler (thermometer codes, clock edge E)
//     -> NUM_TDL x bin_resort (POR bin order, wiring)
//     -> iti_interleave (merged line of MERGED bins, wiring)
//     -> priority_encoder (bin index, E+2)
//     -> code_density_hist (calibration histogram)
//     -> bin_time_lut (fine time t[n], E+3)
//     -> timestamp_assembler (coarse*T_CLK - t[n], registered at E+4).
// All lines are driven by the same pulse and sampled by the same clock.
// The bin orders (RESORT_ORDER) and the interleave map (ITI_MAP) are
// calibration results computed off-line and fixed at synthesis; their
// defaults are the uncalibrated order and an even round-robin spread.
// The bin-to-time table is written through lut_wr_*; the histogram is read
// through hist_rd_addr/hist_rd_data and cleared with hist_clear. Timestamps
// leave on hit; the off-board link is outside this design.
// The delay lines are behavioural timing models, so this module simulates
// the whole converter; for an FPGA build they are replaced by placed
// CARRY8 chains with the same ports.
module tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned NUM_TDL       = 4,
  parameter int unsigned CELLS         = 147,
  parameter int unsigned MERGED        = 3474,
  parameter int unsigned ONES_RUN      = 2,
  parameter real         MEAN_STAGE_PS = 3.6,
  parameter real         MAX_SKEW_PS   = 6.0,
  parameter int unsigned BINS          = CELLS * TAPS_PER_CELL,
  parameter bin_idx_t [NUM_TDL-1:0][BINS-1:0] RESORT_ORDER = '1,  // all BIN_KEEP
  parameter iti_src_t [MERGED-1:0]            ITI_MAP      = '1   // all ITI_AUTO
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              stop,
  // bin-to-time table write port
  input  logic              lut_wr_en,
  input  bin_idx_t          lut_wr_addr,
  input  logic [FINE_W-1:0] lut_wr_data,
  // code density histogram
  input  logic              hist_clear,
  output logic              hist_busy,
  input  bin_idx_t          hist_rd_addr,
  output logic [31:0]       hist_rd_data,
  output logic [31:0]       hist_total,
  // results
  output logic              enc_valid,
  output bin_idx_t          enc_code,
  output logic [COARSE_W-1:0] coarse_now,
  output hit_t              hit
);
  timeunit 1ps;
  timeprecision 1fs;

  logic pulse;
  logic [NUM_TDL-1:0][BINS-1:0] taps, tc_raw, tc_sorted;
  logic [MERGED-1:0] tc_merged;

  pulse_gen u_pulse (.start(start), .stop(stop), .rst_n(rst_n), .pulse(pulse));

  for (genvar l = 0; l < NUM_TDL; l++) begin : g_line
    carry8_tdl #(
      .CELLS(CELLS), .MEAN_STAGE_PS(MEAN_STAGE_PS),
      .MAX_SKEW_PS(MAX_SKEW_PS), .SEED(l + 1)
    ) u_tdl (.din(pulse), .taps(taps[l]));

    tdc_sampler #(.BINS(BINS)) u_smp (.clk(clk), .taps(taps[l]), .tc(tc_raw[l]));

    bin_resort #(.BINS(BINS), .ORDER(RESORT_ORDER[l])) u_sort (
      .tc_in(tc_raw[l]), .tc_out(tc_sorted[l]));
  end

  iti_interleave #(.NUM_TDL(NUM_TDL), .BINS(BINS), .MERGED(MERGED), .MAP(ITI_MAP)) u_iti (
    .tc_in(tc_sorted), .tc_out(tc_merged));

  priority_encoder #(.BINS(MERGED), .ONES_RUN(ONES_RUN)) u_enc (
    .clk(clk), .rst_n(rst_n), .tc(tc_merged), .valid(enc_valid), .code(enc_code));

  code_density_hist #(.BINS(MERGED), .CNT_W(32)) u_hist (
    .clk(clk), .rst_n(rst_n), .hit_valid(enc_valid), .hit_code(enc_code),
    .clear(hist_clear), .busy(hist_busy), .rd_addr(hist_rd_addr),
    .rd_data(hist_rd_data), .total(hist_total));

  logic              fine_valid;
  bin_idx_t          fine_code;
  logic [FINE_W-1:0] fine_fs;

  bin_time_lut #(.BINS(MERGED)) u_lut (
    .clk(clk), .rst_n(rst_n), .wr_en(lut_wr_en), .wr_addr(lut_wr_addr),
    .wr_data(lut_wr_data), .in_valid(enc_valid), .in_code(enc_code),
    .out_valid(fine_valid), .out_code(fine_code), .out_fine_fs(fine_fs));

  timestamp_assembler #(.LATENCY(4)) u_ts (
    .clk(clk), .rst_n(rst_n), .fine_valid(fine_valid), .fine_code(fine_code),
    .fine_fs(fine_fs), .coarse_now(coarse_now), .hit(hit));
endmodule
