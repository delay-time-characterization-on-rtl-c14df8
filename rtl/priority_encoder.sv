// priority_encoder: thermometer code to binary bin index.
//
// The sampled code of a delay line reads 1 for bins the pulse edge has
// passed and 0 beyond (1111..1000..0), with occasional bubbles. The
// encoder takes the first 1-0 transition that is preceded by a run of
// ONES_RUN ones, i.e. bin p is selected (one-hot) when
//     tc[p+1] = 0 and tc[p-ONES_RUN+1] .. tc[p] are all 1,
// with bits below bin 0 read as 1 (the pulse enters there) and the bit
// above the last bin read as 1 (a line full of ones holds no edge). code is
// the 0-based index p; the paper numbers bins from 1, so its one-hot code
// (OHC) equals code+1. valid is low when no bin qualifies.
//
// Pipeline (this design's choice, for a 250 MHz clock on a wide code):
// stage 1 finds the first selected bin inside each GROUP-bit slice and
// registers (found, offset) per slice; stage 2 takes the lowest slice that
// found one and registers code/valid. Latency: 2 clocks from tc to code,
// one result per clock. The run length ONES_RUN is not given by the paper.
module priority_encoder
  import tdc_pkg::*;
#(
  parameter int unsigned BINS     = 3474,
  parameter int unsigned ONES_RUN = 2,
  parameter int unsigned GROUP    = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [BINS-1:0] tc,
  output logic            valid,
  output bin_idx_t        code
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned NG    = (BINS + GROUP - 1) / GROUP;
  localparam int unsigned OFF_W = (GROUP > 1) ? $clog2(GROUP) : 1;

  // ext[k + ONES_RUN - 1] = tc[k]; ones below bin 0 and above the last bin.
  logic [BINS+ONES_RUN-1:0] ext;
  logic [NG*GROUP-1:0]      ohc;

  always_comb begin
    ext = '1;
    ext[ONES_RUN-1 +: BINS] = tc;
    ohc = '0;
    for (int unsigned p = 0; p < BINS; p++)
      ohc[p] = (&ext[p +: ONES_RUN]) & ~ext[p + ONES_RUN];
  end

  // Stage 1: first selected bin per slice.
  logic [NG-1:0]            s1_found;
  logic [NG-1:0][OFF_W-1:0] s1_off;
  logic [NG-1:0]            g_found;
  logic [NG-1:0][OFF_W-1:0] g_off;

  always_comb begin
    for (int unsigned g = 0; g < NG; g++) begin
      g_found[g] = 1'b0;
      g_off[g]   = '0;
      for (int i = int'(GROUP) - 1; i >= 0; i--)
        if (ohc[g*GROUP + i]) begin
          g_found[g] = 1'b1;
          g_off[g]   = OFF_W'(i);
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s1_found <= '0;
      s1_off   <= '0;
    end else begin
      s1_found <= g_found;
      s1_off   <= g_off;
    end

  // Stage 2: lowest slice with a hit.
  bin_idx_t code_d;
  always_comb begin
    code_d = '0;
    for (int g = int'(NG) - 1; g >= 0; g--)
      if (s1_found[g]) code_d = bin_idx_t'(g * GROUP) + bin_idx_t'(s1_off[g]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      valid <= 1'b0;
      code  <= '0;
    end else begin
      valid <= |s1_found;
      code  <= code_d;
    end
endmodule
