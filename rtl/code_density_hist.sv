// code_density_hist: histogram of output codes for the code density test.
//
// Fed with pulses uncorrelated to the sampling clock, each bin is hit with
// a probability proportional to its width, so after many hits
//     W[k] = T_clk * count[k] / total.
// The same counts show which bins are never hit ("untapped", missing
// codes); those patterns drive Partial Order Reconstruction, and the
// widths drive interleaving and bin-width calibration, all off-line.
//
// One counter per bin in a memory; a valid hit increments its counter in
// the same clock (read, add one, write back), so back-to-back hits on one
// bin are counted correctly. Counters saturate at all ones. clear, or
// reset, starts a sweep that zeroes one counter per clock; busy is high
// during the sweep and hits arriving then are not counted. Readout:
// rd_data shows count[rd_addr[AW-1:0]] one clock after rd_addr. total counts the
// hits since the last clear. Where the histogram is built is not stated by
// the paper; placing it beside the encoder is this design's choice.
module code_density_hist
  import tdc_pkg::*;
#(
  parameter int unsigned BINS  = 3474,
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             hit_valid,
  input  bin_idx_t         hit_code,
  input  logic             clear,
  output logic             busy,
  input  bin_idx_t         rd_addr,
  output logic [CNT_W-1:0] rd_data,
  output logic [CNT_W-1:0] total
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned AW = (BINS > 1) ? $clog2(BINS) : 1;

  logic [CNT_W-1:0] cnt [BINS];
  bin_idx_t         clr_addr;

  wire do_hit = !busy && hit_valid && (int'(hit_code) < BINS);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy     <= 1'b1;
      clr_addr <= '0;
      total    <= '0;
    end else if (clear) begin
      busy     <= 1'b1;
      clr_addr <= '0;
      total    <= '0;
    end else if (busy) begin
      if (int'(clr_addr) == BINS - 1) busy <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end else if (do_hit && total != '1) begin
      total <= total + 1'b1;
    end

  // Counter memory: one write per clock, either the sweep or the increment.
  always_ff @(posedge clk)
    if (busy && !clear) cnt[clr_addr[AW-1:0]] <= '0;
    else if (do_hit && !clear && cnt[hit_code[AW-1:0]] != '1) cnt[hit_code[AW-1:0]] <= cnt[hit_code[AW-1:0]] + 1'b1;

  always_ff @(posedge clk)
    rd_data <= (int'(rd_addr) < BINS) ? cnt[rd_addr[AW-1:0]] : '0;
endmodule
