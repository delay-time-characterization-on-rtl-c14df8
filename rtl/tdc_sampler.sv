// tdc_sampler: the rank of D flip-flops that turns delay-line taps into a
// thermometer code.
//
// Every tap of a delay line drives the D input of one flip-flop; all
// flip-flops share the sampling clock. At each rising clock edge the
// register holds a 1 for every tap the pulse has reached and a 0 for the
// rest (ideally 1111..1000..0). tc is valid from the clock edge after the
// taps settle and is held for one period. One rank, as drawn in the paper;
// no reset, since every bit is rewritten on every clock.
module tdc_sampler #(
  parameter int unsigned BINS = 1176
) (
  input  logic            clk,
  input  logic [BINS-1:0] taps,
  output logic [BINS-1:0] tc
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge clk) tc <= taps;
endmodule
