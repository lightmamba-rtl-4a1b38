// tb_ht40: checks the 40-point transform against an independently built H40 (Paley type I,
// q = 19, quadratic residues by Euler's criterion), for unit vectors and random vectors, and
// checks that the matrix is a Hadamard matrix (entries +-1, columns orthogonal).
// How: one 40-vector per cycle; out_data is compared one cycle later. The 40-point matrix unit
// follows the source design; which 40 x 40 Hadamard matrix is used is this design's choice.
`timescale 1ns/1ps
module tb_ht40;
  localparam int N = 40, IW = 23;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [IW-1:0] in_data [N];
  logic signed [IW+5:0] out_data [N];
  ht40 #(.N(N), .IW(IW)) dut (.*);
  int h [N][N];
  int col [N][N];

  function automatic int legendre(int a);
    int r, p;
    a = ((a % 19) + 19) % 19;
    if (a == 0) return 0;
    r = 1; p = a;
    for (int e = 0; e < 9; e++) r = (r * p) % 19;   // a^((19-1)/2) mod 19
    return (r == 1) ? 1 : -1;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int x [N], output int y [N]);
    @(negedge clk);
    in_valid = 1;
    for (int j = 0; j < N; j++) in_data[j] = IW'(x[j]);
    @(negedge clk);
    in_valid = 0;
    for (int i = 0; i < N; i++) y[i] = int'(out_data[i]);
  endtask

  initial begin
    int x [N], y [N];
    in_valid = 0;
    foreach (in_data[j]) in_data[j] = 0;
    for (int i = 0; i < 20; i++)
      for (int j = 0; j < 20; j++) begin
        int v;
        if (i == 0) v = 1; else if (j == 0) v = -1; else v = legendre(j - i) + (i == j ? 1 : 0);
        h[i][j] = v; h[i][j+20] = v; h[i+20][j] = v; h[i+20][j+20] = -v;
      end
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < N; k++) begin
      foreach (x[j]) x[j] = (j == k) ? 1 : 0;
      apply(x, y);
      for (int i = 0; i < N; i++) begin
        col[k][i] = y[i];
        checks++;
        if (y[i] != h[i][k]) failures++;
      end
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        int d; d = 0;
        for (int i = 0; i < N; i++) d += col[a][i] * col[b][i];
        checks++;
        if (d != ((a == b) ? N : 0)) failures++;
      end
    for (int t = 0; t < 20; t++) begin
      foreach (x[j]) x[j] = int'($urandom_range(2000000)) - 1000000;
      apply(x, y);
      for (int i = 0; i < N; i++) begin
        int e; e = 0;
        for (int j = 0; j < N; j++) e += h[i][j] * x[j];
        checks++;
        if (y[i] != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
