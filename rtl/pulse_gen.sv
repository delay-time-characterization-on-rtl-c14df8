// pulse_gen: shapes the TDC input pulse from a START and a STOP edge.
//
// Two flip-flops, one clocked by START and one by STOP, follow the pulse
// generator drawn beside the delay lines: the START flop toggles on every
// START edge, the STOP flop copies the START flop on every STOP edge, and
// the pulse is the exclusive-or of the two. The pulse therefore rises at a
// START edge and falls at the following STOP edge, so its duration is the
// START-to-STOP interval. The pulse feeds the carry input of every delay
// line. The flip-flop pair and the START/STOP clocking follow the paper's
// figure; the toggle arrangement and the exclusive-or are this design's
// reading of the drawn gate. rst_n (asynchronous, active low) clears both
// flops; the paper does not describe a reset.
module pulse_gen (
  input  logic start,
  input  logic stop,
  input  logic rst_n,
  output logic pulse
);
  timeunit 1ps;
  timeprecision 1fs;

  logic q_start, q_stop;

  always_ff @(posedge start or negedge rst_n)
    if (!rst_n) q_start <= 1'b0;
    else        q_start <= ~q_start;

  always_ff @(posedge stop or negedge rst_n)
    if (!rst_n) q_stop <= 1'b0;
    else        q_stop <= q_start;

  assign pulse = q_start ^ q_stop;
endmodule
