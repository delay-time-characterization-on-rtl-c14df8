// carry8_tdl: behavioural timing model of one tapped delay line built from
// CARRY8 cells (not synthesizable logic: it models propagation delay).
//
// On the FPGA the delay line is a chain of CARRY8 primitives whose carry
// input is driven by the shaped pulse; the 'C' (carry) output of each of
// the eight stages of a cell is one tap, and each tap drives one sampling
// flip-flop. What makes such a line a time-to-digital converter is its
// timing, which this model reproduces:
//   * every carry stage adds a delay drawn between 0.1x and 1.9x
//     MEAN_STAGE_PS, so bin widths are strongly non-uniform;
//   * every tap adds its own routing / clock-skew offset in [0, MAX_SKEW_PS),
//     so neighbouring taps can reach their flip-flops out of order. That
//     is the source of the "missing codes" that bin resorting removes.
// The numbers are pseudo-random, fixed by SEED through the hash functions
// tdl_stage_ps/tdl_skew_ps of tdc_pkg, so each instance with a different
// SEED behaves like a different placed line; tdc_pkg::tdl_arrival_ps gives
// the exact time from din to each tap. Delays are inertial continuous
// assignments; the pulse must be longer than the largest single delay.
// The CARRY8 count and the delay statistics are this design's choices; the
// paper gives only the cell type, the use of the C taps and measured
// bin-width histograms (0 to about 15 ps).
module carry8_tdl
  import tdc_pkg::*;
#(
  parameter int unsigned CELLS         = 147,
  parameter real         MEAN_STAGE_PS = 3.6,
  parameter real         MAX_SKEW_PS   = 6.0,
  parameter int unsigned SEED          = 1
) (
  input  logic                            din,
  output logic [CELLS*TAPS_PER_CELL-1:0]  taps
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned BINS = CELLS * TAPS_PER_CELL;

  logic [BINS:0] carry;
  assign carry[0] = din;

  for (genvar i = 0; i < BINS; i++) begin : g_stage
    localparam real D_STAGE = tdl_stage_ps(SEED, MEAN_STAGE_PS, i);
    localparam real D_SKEW  = tdl_skew_ps(SEED, MAX_SKEW_PS, i);
    assign #(D_STAGE) carry[i+1] = carry[i];
    assign #(D_SKEW)  taps[i]    = carry[i+1];
  end
endmodule
