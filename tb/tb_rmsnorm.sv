// tb_rmsnorm: random vectors of different magnitudes through a 256-element RMSNorm with gain;
// each output is compared with x / sqrt(mean(x^2)) * g computed in real arithmetic (within
// 2 LSB), with random output back-pressure.
// How: loads random gains on the g_* port, streams vectors with valid/ready, and holds
// out_ready low on random cycles. RMSNorm itself is only named in the source design; the
// sequential algorithm and the Q5.10 output format are this design's choice.
`timescale 1ns/1ps
module tb_rmsnorm;
  localparam int N = 256, FRAC = 10, GFRAC = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic g_we, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [7:0] g_addr;
  logic signed [15:0] g_data;
  logic signed [31:0] in_data;
  logic signed [15:0] out_data;
  rmsnorm #(.N(N), .IW(32), .OW(16), .FRAC(FRAC), .USE_GAIN(1'b1), .GFRAC(GFRAC)) dut (.*);
  int x [N];
  int g [N];
  real rms;
  int nout;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (out_valid && out_ready) begin
    real e; int ei, d;
    e = real'(x[nout]) / rms * real'(g[nout]) / real'(1 << GFRAC) * real'(1 << FRAC);
    ei = int'($floor(e));
    d = int'(out_data) - ei;
    checks++;
    if (d > 2 || d < -2) begin failures++; if (failures < 5) $display("i%0d got %0d exp %f", nout, out_data, e); end
    checks++;
    if (out_last != (nout == N - 1)) failures++;
    nout++;
  end
  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  initial begin
    g_we = 0; g_addr = 0; g_data = 0; in_valid = 0; in_data = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      g[i] = int'($urandom_range(8192));
      @(negedge clk); g_we = 1; g_addr = 8'(i); g_data = 16'(g[i]);
    end
    @(negedge clk); g_we = 0;
    for (int v = 0; v < 3; v++) begin
      real ss; int m;
      m = (v == 0) ? 1000 : (v == 1) ? 100000000 : 37;
      ss = 0.0;
      for (int i = 0; i < N; i++) begin
        x[i] = int'($urandom_range(2 * m)) - m;
        ss += real'(x[i]) * real'(x[i]);
      end
      rms = $sqrt(ss / real'(N));
      nout = 0;
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_data = x[i];
        @(posedge clk); #1 in_valid = 0;
      end
      while (nout < N) @(posedge clk);
      checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
