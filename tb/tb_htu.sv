// tb_htu: rotates two random 5120-element vectors and compares every output with
// y[k*128+j] = sum_k' H40[k][k'] sum_j' H128[j][j'] x[k'*128+j'], where H128 is the Sylvester
// matrix and H40 is built here independently (Paley type I of q = 19, Euler's criterion).
// How: 5120 elements are offered one per cycle with valid/ready; the 128 output beats (one per
// column j) are compared. Timing: the bench checks that the whole rotation ends within the
// watchdog. The 128 x 40 split follows the source design; the Kronecker join through a
// 40-bank buffer and the output order are this design's choice.
`timescale 1ns/1ps
module tb_htu;
  localparam int SEGS = 40, SL = 128, IW = 16, TOT = SEGS * SL, NV = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid;
  logic signed [IW-1:0] in_data;
  logic [6:0] out_col;
  logic signed [IW+12:0] out_data [SEGS];
  htu #(.SEGS(SEGS), .SEG_LEN(SL), .IW(IW)) dut (.*);
  int x [TOT];
  longint t [TOT];
  longint ref_y [TOT];
  int h40 [SEGS][SEGS];
  int nbeat = 0, vec = 0;

  function automatic int legendre(int a);
    int r;
    a = ((a % 19) + 19) % 19;
    if (a == 0) return 0;
    r = 1;
    for (int e = 0; e < 9; e++) r = (r * a) % 19;
    return (r == 1) ? 1 : -1;
  endfunction

  task automatic reference();
    for (int k = 0; k < SEGS; k++)
      for (int j = 0; j < SL; j++) begin
        t[k*SL+j] = 0;
        for (int jj = 0; jj < SL; jj++)
          t[k*SL+j] += ($countones(j & jj) % 2) ? -x[k*SL+jj] : x[k*SL+jj];
      end
    for (int k = 0; k < SEGS; k++)
      for (int j = 0; j < SL; j++) begin
        ref_y[k*SL+j] = 0;
        for (int kk = 0; kk < SEGS; kk++) ref_y[k*SL+j] += h40[k][kk] * t[kk*SL+j];
      end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    checks++;
    if (int'(out_col) != nbeat) failures++;
    for (int k = 0; k < SEGS; k++) begin
      checks++;
      if (longint'(out_data[k]) != ref_y[k*SL+int'(out_col)]) begin
        failures++;
        if (failures < 5) $display("col %0d seg %0d got %0d exp %0d", out_col, k, out_data[k], ref_y[k*SL+int'(out_col)]);
      end
    end
    nbeat++;
  end

  initial begin
    for (int i = 0; i < 20; i++)
      for (int j = 0; j < 20; j++) begin
        int v;
        if (i == 0) v = 1; else if (j == 0) v = -1; else v = legendre(j - i) + (i == j ? 1 : 0);
        h40[i][j] = v; h40[i][j+20] = v; h40[i+20][j] = v; h40[i+20][j+20] = -v;
      end
    in_valid = 0; in_data = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      foreach (x[i]) x[i] = int'($urandom_range(65535)) - 32768;
      reference();
      nbeat = 0;
      for (int i = 0; i < TOT; i++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_data = IW'(x[i]);
        @(posedge clk); #1 in_valid = 0;
      end
      while (nbeat < SL) @(posedge clk);
      @(posedge clk);
      checks++;
      if (nbeat != SL) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
