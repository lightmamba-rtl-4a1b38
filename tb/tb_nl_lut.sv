// tb_nl_lut: all 256 inputs of the softplus, exp and SiLU tables against real arithmetic
// (within one output LSB).
// How: one input per cycle on each of the three tables; out_data is checked one cycle later.
// The three functions are named in the source design; the table form and formats (Q3.4 in,
// Q3.4 out) are this design's choice.
`timescale 1ns/1ps
module tb_nl_lut;
  import lm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic in_valid;
  int8_t in_data;
  logic v0, v1, v2;
  int8_t o0, o1, o2;
  nl_lut #(.FUNC(NL_SOFTPLUS), .IN_FRAC(4), .OUT_FRAC(4)) u_sp (.clk, .rst_n, .in_valid, .in_data, .out_valid(v0), .out_data(o0));
  nl_lut #(.FUNC(NL_EXP),      .IN_FRAC(4), .OUT_FRAC(7)) u_ex (.clk, .rst_n, .in_valid, .in_data, .out_valid(v1), .out_data(o1));
  nl_lut #(.FUNC(NL_SILU),     .IN_FRAC(4), .OUT_FRAC(4)) u_si (.clk, .rst_n, .in_valid, .in_data, .out_valid(v2), .out_data(o2));

  function automatic int q(real y, int frac);
    real r;
    r = y * real'(1 << frac);
    if (r > 127.0) r = 127.0;
    if (r < -128.0) r = -128.0;
    return int'($floor(r + 0.5));
  endfunction
  function automatic int absd(int a, int b); return (a > b) ? a - b : b - a; endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    in_valid = 0; in_data = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = -128; i < 128; i++) begin
      real x;
      @(negedge clk); in_valid = 1; in_data = 8'(i);
      @(negedge clk); in_valid = 0;
      x = real'(i) / 16.0;
      checks += 4;
      if (!(v0 && v1 && v2)) failures++;
      if (absd(int'(o0), q($ln(1.0 + $exp(x)), 4)) > 1) failures++;
      if (absd(int'(o1), q($exp(x), 7)) > 1) failures++;
      if (absd(int'(o2), q(x / (1.0 + $exp(-x)), 4)) > 1) begin
        failures++; if (failures < 5) $display("silu %0d got %0d", i, o2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
