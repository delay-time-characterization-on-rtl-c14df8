// tb_priority_encoder: the two codes of the paper's missing-code example
// (11101000 -> 3rd bin, 11111000 -> 5th bin, 1-based), then random
// thermometer codes with bubbles and with a pulse tail, against a
// reference scan written here. Each result must appear exactly two clocks
// after its code.
module tb_priority_encoder;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned BINS = 150;
  localparam int unsigned RUN  = 2;

  logic clk = 0, rst_n = 0;
  logic [BINS-1:0] tc = '0;
  logic [7:0] tc8 = '0;
  logic valid, valid8;
  bin_idx_t code, code8;
  int checks = 0, failures = 0;

  priority_encoder #(.BINS(BINS), .ONES_RUN(RUN), .GROUP(16)) dut (
    .clk(clk), .rst_n(rst_n), .tc(tc), .valid(valid), .code(code));
  priority_encoder #(.BINS(8), .ONES_RUN(RUN), .GROUP(4)) dut8 (
    .clk(clk), .rst_n(rst_n), .tc(tc8), .valid(valid8), .code(code8));

  always #2000 clk = ~clk;

  // Reference: first p with tc[p+1]==0 and RUN ones ending at p; bits below
  // 0 and above BINS-1 read as 1.
  function automatic logic bit_at(logic [BINS-1:0] v, int i);
    if (i < 0 || i >= int'(BINS)) return 1'b1;
    return v[i];
  endfunction
  function automatic int ref_code(logic [BINS-1:0] v);
    for (int p = 0; p < int'(BINS); p++) begin
      logic ok = ~bit_at(v, p + 1);
      for (int k = 0; k < int'(RUN); k++) ok &= bit_at(v, p - k);
      if (ok) return p;
    end
    return -1;
  endfunction

  initial begin : watchdog
    #10us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q[$];
  int exp;
  logic [BINS-1:0] v;
  int edge_pos, tail;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Paper example, bins written 1..8 left to right = bits 0..7.
    @(negedge clk) tc8 = 8'b0001_0111;   // 1,2,3 and 5 set
    @(negedge clk) tc8 = 8'b0001_1111;   // 1..5 set
    @(posedge clk); #1;                  // two clocks after (i)
    checks++;
    if (!(valid8 && code8 == 2)) begin failures++; $display("FAIL example (i): %b %0d", valid8, code8); end
    @(negedge clk) tc8 = 8'b0000_0000;
    @(posedge clk); #1;
    checks++;
    if (!(valid8 && code8 == 4)) begin failures++; $display("FAIL example (ii): %b %0d", valid8, code8); end
    @(posedge clk); #1;
    checks++;
    if (valid8) begin failures++; $display("FAIL all zero gave a hit"); end

    // Random codes, one per clock; results compared two clocks later.
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      edge_pos = $urandom_range(0, BINS);
      v = '0;
      for (int i = 0; i < edge_pos; i++) v[i] = 1'b1;
      case ($urandom_range(0, 3))
        0: ;                                                         // clean
        1: v[$urandom_range(0, BINS - 1)] ^= 1'b1;                   // one bubble
        2: begin                                                     // bubbles near the edge
             v[(edge_pos + 1) % BINS] = 1'b1;
             if (edge_pos > 2) v[edge_pos - 2] = 1'b0;
           end
        default: begin                                               // pulse tail: leading zeros
             tail = $urandom_range(0, edge_pos);
             for (int i = 0; i < tail; i++) v[i] = 1'b0;
           end
      endcase
      tc = v;
      exp_q.push_back(ref_code(v));
      if (exp_q.size() > 2) begin
        exp = exp_q.pop_front();
        checks++;
        if ((exp < 0 && valid) || (exp >= 0 && !(valid && int'(code) == exp))) begin
          failures++;
          $display("FAIL n=%0d expected %0d got valid=%b code=%0d", n, exp, valid, code);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
