// bin_time_lut: bin-to-time map of the merged delay line.
//
// Each bin n of the merged line starts at the calibrated time
//     t[n] = W[0] + W[1] + ... + W[n-1],   t[0] = 0,
// where W[k] are the bin widths from a code density test (the start time,
// not the centre, is used so that the order of the bins is preserved).
// The table holds t[n] in femtoseconds. It powers up with the ideal map of
// equal bins, t[n] = n * T_CLK / BINS, and is overwritten through the
// write port once the real widths are known. A lookup (in_valid, in_code)
// returns out_valid/out_fine_fs one clock later; out_code follows along.
// The paper keeps this map in the processor system; a memory in logic is
// this design's choice.
module bin_time_lut
  import tdc_pkg::*;
#(
  parameter int unsigned BINS = 3474
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  bin_idx_t          wr_addr,
  input  logic [FINE_W-1:0] wr_data,
  input  logic              in_valid,
  input  bin_idx_t          in_code,
  output logic              out_valid,
  output bin_idx_t          out_code,
  output logic [FINE_W-1:0] out_fine_fs
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned AW = (BINS > 1) ? $clog2(BINS) : 1;

  logic [FINE_W-1:0] t_start [BINS];

  initial
    for (int unsigned n = 0; n < BINS; n++)
      t_start[n] = FINE_W'((longint'(n) * T_CLK_FS) / BINS);

  always_ff @(posedge clk)
    if (wr_en && int'(wr_addr) < BINS) t_start[wr_addr[AW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_code  <= '0;
    end else begin
      out_valid <= in_valid && int'(in_code) < BINS;
      out_code  <= in_code;
    end

  always_ff @(posedge clk)
    out_fine_fs <= (int'(in_code) < BINS) ? t_start[in_code[AW-1:0]] : '0;
endmodule
