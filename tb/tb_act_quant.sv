// tb_act_quant: groups of random magnitude; checks the group exponent (smallest shift that
// brings the largest magnitude below 8) and every INT4 value (round half up, saturate).
// How: streams groups of 128 random values of varied magnitude with valid/ready and compares
// each INT4 output and the group exponent with a model. Groups of 128 follow the source design;
// the power-of-two activation scale is this design's choice.
`timescale 1ns/1ps
module tb_act_quant;
  import lm_pkg::*;
  localparam int G = 128, IW = 32, NG = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_last;
  logic signed [IW-1:0] in_data;
  int4_t out_data;
  logic [4:0] out_shift;
  act_quant #(.GSIZE(G), .IW(IW)) dut (.*);
  int x [NG][G];
  int exp_sh [NG];
  int nout = 0;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (out_valid) begin
    int g, i, s; real r; int e;
    g = nout / G; i = nout % G; s = exp_sh[g];
    r = $floor(real'(x[g][i]) / real'(longint'(1) << s) + 0.5);
    e = (r > 7.0) ? 7 : (r < -8.0) ? -8 : int'(r);
    checks += 3;
    if (int'(out_shift) != s) begin failures++; if (failures < 4) $display("g%0d shift %0d exp %0d", g, out_shift, s); end
    if (int'(out_data) != e) failures++;
    if (out_last != (i == G - 1)) failures++;
    nout++;
  end
  initial begin
    in_valid = 0; in_data = 0;
    for (int g = 0; g < NG; g++) begin
      int m, mx;
      m = 1 << (g * 5);
      mx = 0;
      for (int i = 0; i < G; i++) begin
        x[g][i] = int'($urandom_range(2 * m)) - m;
        if ((x[g][i] < 0 ? -x[g][i] : x[g][i]) > mx) mx = (x[g][i] < 0 ? -x[g][i] : x[g][i]);
      end
      exp_sh[g] = 0;
      while ((mx >> exp_sh[g]) >= 8) exp_sh[g]++;
    end
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < NG; g++)
      for (int i = 0; i < G; i++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_data = x[g][i];
        @(posedge clk); #1 in_valid = 0;
      end
    repeat (300) @(posedge clk);
    checks++;
    if (nout != NG * G) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
