// tb_bin_resort: applies the bin swap of the paper's missing-code example
// (bins 4 and 5 exchanged, 1-based) plus a random permutation, and checks
// every output bit against the input bit the map names; a second instance
// with the default map must leave the order unchanged.
module tb_bin_resort;
  import tdc_pkg::*;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int unsigned B1 = 8;
  localparam int unsigned B2 = 24;
  // Output i reads input SWAP45[i]: 0,1,2,4,3,5,6,7.
  localparam bin_idx_t [B1-1:0] SWAP45 = {16'd7, 16'd6, 16'd5, 16'd3, 16'd4, 16'd2, 16'd1, 16'd0};

  function automatic bin_idx_t [B2-1:0] rotate_map();
    bin_idx_t [B2-1:0] m;
    for (int i = 0; i < B2; i++) m[i] = bin_idx_t'((i * 7 + 3) % B2);  // 7 is coprime with 24
    m[5]  = BIN_KEEP;  // was 14: bin 5 stays in place ...
    m[14] = 16'd14;    // ... and bin 14 (was read by output 5) stays too
    return m;
  endfunction
  localparam bin_idx_t [B2-1:0] ROT = rotate_map();

  logic [B1-1:0] a_in, a_out;
  logic [B2-1:0] b_in, b_out, c_out;
  int checks = 0, failures = 0;

  bin_resort #(.BINS(B1), .ORDER(SWAP45)) dut_a (.tc_in(a_in), .tc_out(a_out));
  bin_resort #(.BINS(B2), .ORDER(ROT))    dut_b (.tc_in(b_in), .tc_out(b_out));
  bin_resort #(.BINS(B2))                 dut_c (.tc_in(b_in), .tc_out(c_out));

  initial begin : watchdog
    #1us;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int src;
  initial begin
    // Perceived 11101000 -> actual order puts bin 5 before bin 4.
    a_in = 8'b0001_0111;  // bits 0,1,2 and 4 set (bins 1,2,3,5 in 1-based terms)
    #1;
    checks++;
    if (a_out !== 8'b0000_1111) begin
      failures++;
      $display("FAIL swap example: %b", a_out);
    end
    for (int n = 0; n < 50; n++) begin
      a_in = 8'($urandom);
      b_in = B2'($urandom);
      #1;
      for (int i = 0; i < B1; i++) begin
        checks++;
        if (a_out[i] !== a_in[int'(SWAP45[i])]) begin
          failures++;
          $display("FAIL a bit %0d", i);
        end
      end
      for (int i = 0; i < B2; i++) begin
        src = (i == 5 || i == 14) ? i : (i * 7 + 3) % B2;
        checks += 2;
        if (b_out[i] !== b_in[src]) begin
          failures++;
          $display("FAIL b bit %0d", i);
        end
        if (c_out[i] !== b_in[i]) begin
          failures++;
          $display("FAIL default map bit %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
