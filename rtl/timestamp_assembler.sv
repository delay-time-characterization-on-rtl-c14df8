// timestamp_assembler: coarse period counter and full timestamps.
//
// A free-running counter numbers the periods of the sampling clock and
// gives the design its long range; the fine time from the bin-to-time map
// places the hit inside a period. An edge found t[n] into the delay line
// entered it t[n] before the sampling edge, so
//     time_fs = coarse * T_CLK_FS - fine_fs,
// where coarse is the counter value at the sampling edge. In tdc_top the
// fine time is registered three edges after the sampling edge E (encoder
// stages at E+1 and E+2, table read at E+3) and taken here at E+4, when the
// counter reads 4 more than it did at E; LATENCY = 4 removes that. hit is registered: one clock
// after fine_valid. The paper keeps the coarse count in its processor;
// doing it in logic, and the sign convention, are this design's choices.
module timestamp_assembler
  import tdc_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fine_valid,
  input  bin_idx_t          fine_code,
  input  logic [FINE_W-1:0] fine_fs,
  output logic [COARSE_W-1:0] coarse_now,
  output hit_t              hit
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [COARSE_W-1:0] coarse_at_edge;
  assign coarse_at_edge = coarse_now - COARSE_W'(LATENCY);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) coarse_now <= '0;
    else        coarse_now <= coarse_now + 1'b1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) hit <= '0;
    else begin
      hit.valid   <= fine_valid;
      hit.coarse  <= coarse_at_edge;
      hit.code    <= fine_code;
      hit.fine_fs <= fine_fs;
      hit.time_fs <= 64'(coarse_at_edge) * 64'(T_CLK_FS) - 64'(fine_fs);
    end
endmodule
