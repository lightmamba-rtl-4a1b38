// tb_emu: random INT8 products re-quantised by random shifts, compared with round-half-up
// division by 2^shift and INT8 saturation computed in real arithmetic.
// How: random operands on all 16 lanes and a random shift each cycle; y is checked one cycle
// later. Power-of-two re-quantisation by shifting follows the source design; round half up and
// saturation are this design's choice.
`timescale 1ns/1ps
module tb_emu;
  import lm_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  int8_t a [L], b [L], y [L];
  logic [4:0] shift;
  emu #(.LANES(L)) dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; shift = 0;
    foreach (a[i]) begin a[i] = 0; b[i] = 0; end
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      in_valid = 1; shift = 5'($urandom_range(12));
      foreach (a[i]) begin a[i] = 8'($urandom); b[i] = 8'($urandom); end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < L; i++) begin
        real r; int e;
        r = $floor(real'(int'(a[i]) * int'(b[i])) / real'(1 << shift) + 0.5);
        e = (r > 127.0) ? 127 : (r < -128.0) ? -128 : int'(r);
        checks++;
        if (int'(y[i]) != e) begin failures++; if (failures < 5) $display("%0d*%0d>>%0d got %0d exp %0d", a[i], b[i], shift, y[i], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
