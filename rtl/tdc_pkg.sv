// tdc_pkg: constants and types shared by the tapped-delay-line TDC.
//
// Times travel through the design in femtoseconds. The sampling clock runs
// at 250 MHz (4 ns period), which is the span a fine time must cover. Bin
// indices are 16-bit, enough for the 3474-bin merged line and for
// the 1176 taps of one delay line. The two sentinels BIN_KEEP and ITI_AUTO
// let the resorting and interleaving maps default to a computed wiring
// when no calibration result is supplied.
package tdc_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  // Sampling clock period in fs (250 MHz).
  localparam int unsigned T_CLK_FS = 4_000_000;
  // Width of a fine time in fs: 2^22 fs = 4.19 ns > T_CLK_FS.
  localparam int unsigned FINE_W   = 22;
  // Width of the coarse (clock period) counter.
  localparam int unsigned COARSE_W = 48;
  // Carry stages, and taps, per CARRY8 cell.
  localparam int unsigned TAPS_PER_CELL = 8;

  typedef logic [15:0] bin_idx_t;

  // Resorting map entry meaning "leave this bin where it is".
  localparam bin_idx_t BIN_KEEP = 16'hFFFF;

  // One source bin of the merged line: which delay line and which bin of it.
  typedef struct packed {
    logic [3:0] line;
    bin_idx_t   bin;
  } iti_src_t;

  // Interleave map entry meaning "use the default round-robin spread".
  localparam iti_src_t ITI_AUTO = '{line: 4'hF, bin: 16'hFFFF};

  // One measured hit.
  typedef struct packed {
    logic                valid;
    logic [COARSE_W-1:0] coarse;   // sampling-clock period of the hit
    bin_idx_t            code;     // merged-line bin index
    logic [FINE_W-1:0]   fine_fs;  // calibrated fine time t[code]
    logic [63:0]         time_fs;  // coarse*T_CLK_FS - fine_fs
  } hit_t;

  // Timing of the behavioural delay-line model (carry8_tdl). A 32-bit
  // integer hash gives each stage and tap of a line a fixed pseudo-random
  // value in [0,1); the line's SEED picks a different set. Kept here so that
  // testbenches can compute the true tap order of a modelled line.
  function automatic real tdl_urand(int unsigned seed, int unsigned a, int unsigned b);
    logic [31:0] h;
    h = a * 32'h9E37_79B1 ^ (b + 32'h7F4A_7C15) * 32'h85EB_CA6B ^ seed * 32'hC2B2_AE35;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return real'(h) / 4294967296.0;
  endfunction

  // Delay of carry stage i: 0.1x .. 1.9x the mean.
  function automatic real tdl_stage_ps(int unsigned seed, real mean_ps, int unsigned i);
    return mean_ps * (0.1 + 1.8 * tdl_urand(seed, i, 0));
  endfunction

  // Routing and clock-skew offset of tap i: 0 .. max_ps.
  function automatic real tdl_skew_ps(int unsigned seed, real max_ps, int unsigned i);
    return max_ps * tdl_urand(seed, i, 1);
  endfunction

  // Time from the line input to the sampling flip-flop of tap i.
  function automatic real tdl_arrival_ps(int unsigned seed, real mean_ps, real max_ps,
                                         int unsigned i);
    real t = 0.0;
    for (int unsigned k = 0; k <= i; k++) t += tdl_stage_ps(seed, mean_ps, k);
    return t + tdl_skew_ps(seed, max_ps, i);
  endfunction

endpackage
