// tb_conv1d: three decode steps over 16 channels in shuffled order with random weights;
// compares each output with bias + sum of weight x history computed here and re-quantised
// (round half up, saturate).
// How: loads taps and bias per channel, waits for in_ready after the state clear, then sends
// one sample per cycle; out_data is checked one cycle later. The conv1d is only named in the
// source design; the arithmetic and formats are this design's choice.
`timescale 1ns/1ps
module tb_conv1d;
  import lm_pkg::*;
  localparam int CH = 16, K = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic cfg_we, in_valid, in_ready, out_valid;
  logic [3:0] cfg_ch, in_ch;
  int8_t cfg_w [K];
  logic signed [15:0] cfg_b;
  int8_t in_data, out_data;
  logic [4:0] shift;
  conv1d #(.CH(CH), .K(K)) dut (.*);
  int w [CH][K];
  int b [CH];
  int hist [CH][K-1];
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cfg_we = 0; cfg_ch = 0; cfg_b = 0; in_valid = 0; in_ch = 0; in_data = 0; shift = 5'd6;
    foreach (cfg_w[k]) cfg_w[k] = 0;
    foreach (hist[c, k]) hist[c][k] = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < CH; c++) begin
      @(negedge clk);
      cfg_we = 1; cfg_ch = 4'(c);
      for (int k = 0; k < K; k++) begin w[c][k] = int'($urandom_range(255)) - 128; cfg_w[k] = 8'(w[c][k]); end
      b[c] = int'($urandom_range(2000)) - 1000; cfg_b = 16'(b[c]);
    end
    @(negedge clk); cfg_we = 0;
    while (!in_ready) @(negedge clk);
    for (int step = 0; step < 3; step++)
      for (int i = 0; i < CH; i++) begin
        int c, xv, acc, e; real r;
        c = (i * 5 + step) % CH;
        xv = int'($urandom_range(255)) - 128;
        acc = b[c] + w[c][K-1] * xv;
        for (int k = 0; k < K - 1; k++) acc += w[c][k] * hist[c][k];
        r = $floor(real'(acc) / 64.0 + 0.5);
        e = (r > 127.0) ? 127 : (r < -128.0) ? -128 : int'(r);
        for (int k = 0; k < K - 2; k++) hist[c][k] = hist[c][k+1];
        hist[c][K-2] = xv;
        @(negedge clk); in_valid = 1; in_ch = 4'(c); in_data = 8'(xv);
        @(negedge clk); in_valid = 0;
        checks += 2;
        if (!out_valid) failures++;
        if (int'(out_data) != e) begin failures++; if (failures < 5) $display("s%0d c%0d got %0d exp %0d", step, c, out_data, e); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
