// tb_ht128: streams 4 random 128-element vectors (back to back, then with random gaps) and
// compares every output with the Walsh-Hadamard sum y[i] = sum_j (-1)^popcount(i&j) x[j].
// How: one element per cycle on in_valid (with random idle cycles in the second pass); the
// outputs are collected in order and compared. The 7-stage streaming FHT follows the source
// design; element order and the unscaled output (7 bits of growth) are this design's choice.
`timescale 1ns/1ps
module tb_ht128;
  localparam int N = 128, IW = 16, NV = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [IW-1:0] in_data;
  logic signed [IW+6:0] out_data;
  ht128 #(.N(N), .IW(IW)) dut (.*);
  int x [NV][N];
  int nout = 0;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (out_valid) begin
    int v, i, e;
    v = nout / N; i = nout % N; e = 0;
    for (int j = 0; j < N; j++) e += ($countones(i & j) % 2) ? -x[v][j] : x[v][j];
    checks++;
    if (int'(out_data) != e) begin failures++; if (failures < 6) $display("v%0d i%0d got %0d exp %0d", v, i, out_data, e); end
    nout++;
  end
  initial begin
    in_valid = 0; in_data = 0;
    foreach (x[v, j]) x[v][j] = int'($urandom_range(65535)) - 32768;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int v = 0; v < NV; v++)
      for (int j = 0; j < N; j++) begin
        if (v >= 2) while ($urandom_range(2) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk); in_valid = 1; in_data = IW'(x[v][j]);
      end
    @(negedge clk); in_valid = 0;
    repeat (400) @(posedge clk);
    checks++;
    if (nout != NV * N) begin failures++; $display("count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
