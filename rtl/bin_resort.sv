// bin_resort: re-wires one delay line's thermometer code into the bin
// order found by Partial Order Reconstruction (POR).
//
// The physical tap order of an FPGA carry chain is not the order in which
// the taps see the pulse: routing and clock skew swap neighbouring bins,
// which shows up as missing codes in a code density test. POR infers the
// true order off-line and the design applies it "at the encoder level":
// output bit i takes input bit ORDER[i]. The map is a synthesis-time
// parameter, as in the paper, where each POR step is followed by a new
// synthesis. An entry equal to BIN_KEEP leaves bit i in place, so the
// default (all BIN_KEEP) is the uncalibrated order. Purely combinational,
// zero latency. ORDER must be a permutation of 0..BINS-1 (checked at
// elaboration time by the assertion below when simulation runs).
module bin_resort
  import tdc_pkg::*;
#(
  parameter int unsigned BINS = 1176,
  parameter bin_idx_t [BINS-1:0] ORDER = '1  // all BIN_KEEP
) (
  input  logic [BINS-1:0] tc_in,
  output logic [BINS-1:0] tc_out
);
  timeunit 1ps;
  timeprecision 1fs;

  function automatic int unsigned src_of(int unsigned i);
    return (ORDER[i] == BIN_KEEP) ? i : int'(ORDER[i]);
  endfunction

  for (genvar i = 0; i < BINS; i++) begin : g_bit
    localparam int unsigned SRC = src_of(i);
    if (SRC >= BINS) begin : g_bad
      $error("bin_resort: ORDER entry out of range");
    end
    assign tc_out[i] = tc_in[SRC];
  end

  // Every source must be used exactly once.
  initial begin : chk_perm
    static bit [BINS-1:0] used = '0;
    for (int unsigned i = 0; i < BINS; i++) begin
      assert (!used[src_of(i)]) else $error("bin_resort: ORDER repeats bin %0d", src_of(i));
      used[src_of(i)] = 1'b1;
    end
  end
endmodule
