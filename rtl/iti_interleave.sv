// iti_interleave: Iterative Time-bin Interleaving (ITI) of several
// calibrated delay lines into one merged line.
//
// Instead of averaging the fine times of several lines, ITI wires the bins
// of all lines into a single thermometer code ordered by each bin's
// calibrated start time t[n] = W[0] + ... + W[n-1] (W = bin width from a
// code density test). Sorting those start times across lines, and dropping
// bins narrower than a threshold (0.2 ps in the paper), is done off-line;
// its result is the parameter MAP: merged bit j is bit MAP[j].bin of line
// MAP[j].line. Input bins that MAP does not name are left unconnected.
//
// An entry equal to ITI_AUTO selects this design's default: global index
// g = floor(j * NUM_TDL * BINS / longint'(MERGED)), taken round-robin (line g mod
// NUM_TDL, bin g div NUM_TDL). That is the order of identical lines whose
// starts are offset by a quarter bin each, with the unused bins spread
// evenly. Purely combinational wiring, zero latency.
module iti_interleave
  import tdc_pkg::*;
#(
  parameter int unsigned NUM_TDL = 4,
  parameter int unsigned BINS    = 1176,
  parameter int unsigned MERGED  = 3474,
  parameter iti_src_t [MERGED-1:0] MAP = '1  // all ITI_AUTO
) (
  input  logic [NUM_TDL-1:0][BINS-1:0] tc_in,
  output logic [MERGED-1:0]            tc_out
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned TOTAL = NUM_TDL * BINS;

  function automatic int unsigned src_line(int unsigned j);
    longint unsigned g;
    if (MAP[j] != ITI_AUTO) return int'(MAP[j].line);
    g = (longint'(j) * TOTAL) / longint'(MERGED);
    return int'(g % longint'(NUM_TDL));
  endfunction

  function automatic int unsigned src_bin(int unsigned j);
    longint unsigned g;
    if (MAP[j] != ITI_AUTO) return int'(MAP[j].bin);
    g = (longint'(j) * TOTAL) / longint'(MERGED);
    return int'(g / longint'(NUM_TDL));
  endfunction

  if (MERGED > TOTAL) begin : g_bad_size
    $error("iti_interleave: MERGED exceeds the number of input bins");
  end

  for (genvar j = 0; j < MERGED; j++) begin : g_bit
    localparam int unsigned L = src_line(j);
    localparam int unsigned B = src_bin(j);
    if (L >= NUM_TDL || B >= BINS) begin : g_bad
      $error("iti_interleave: MAP entry out of range");
    end
    assign tc_out[j] = tc_in[L][B];
  end
endmodule
