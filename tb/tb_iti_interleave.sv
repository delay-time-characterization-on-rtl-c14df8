// tb_iti_interleave: an explicit map (two lines, one input bin dropped) and
// the default round-robin spread (four lines, 12 bins into 10) are checked
// bit by bit against the source each merged bin must come from.
module tb_iti_interleave;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  // Explicit map: 2 lines x 4 bins -> 7 merged bins, line 1 bin 2 dropped.
  localparam iti_src_t [6:0] MAP_A = {
    iti_src_t'{line: 4'd1, bin: 16'd3},
    iti_src_t'{line: 4'd0, bin: 16'd3},
    iti_src_t'{line: 4'd0, bin: 16'd2},
    iti_src_t'{line: 4'd1, bin: 16'd1},
    iti_src_t'{line: 4'd0, bin: 16'd1},
    iti_src_t'{line: 4'd1, bin: 16'd0},
    iti_src_t'{line: 4'd0, bin: 16'd0}};
  localparam int EXP_LINE_A [7] = '{0, 1, 0, 1, 0, 0, 1};
  localparam int EXP_BIN_A  [7] = '{0, 0, 1, 1, 2, 3, 3};
  // Default spread, 4 lines x 3 bins -> 10: g = floor(j*12/10) = 0,1,2,3,4,6,7,8,9,10.
  localparam int EXP_G_B [10] = '{0, 1, 2, 3, 4, 6, 7, 8, 9, 10};

  logic [1:0][3:0]  a_in;
  logic [6:0]       a_out;
  logic [3:0][2:0]  b_in;
  logic [9:0]       b_out;
  int checks = 0, failures = 0;

  iti_interleave #(.NUM_TDL(2), .BINS(4), .MERGED(7), .MAP(MAP_A)) dut_a (.tc_in(a_in), .tc_out(a_out));
  iti_interleave #(.NUM_TDL(4), .BINS(3), .MERGED(10))             dut_b (.tc_in(b_in), .tc_out(b_out));

  initial begin : watchdog
    #1us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 60; n++) begin
      a_in = 8'($urandom);
      b_in = 12'($urandom);
      #1;
      for (int j = 0; j < 7; j++) begin
        checks++;
        if (a_out[j] !== a_in[EXP_LINE_A[j]][EXP_BIN_A[j]]) begin
          failures++;
          $display("FAIL map A bit %0d", j);
        end
      end
      for (int j = 0; j < 10; j++) begin
        checks++;
        if (b_out[j] !== b_in[EXP_G_B[j] % 4][EXP_G_B[j] / 4]) begin
          failures++;
          $display("FAIL default spread bit %0d", j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
