// tb_dsp_pack: exhaustive check of the packed dual multiplier against plain products.
// How: loops over every INT4 activation and every pair of INT4 weights, applies them to the
// combinational unit and compares both 8-bit products with act*w computed as integers.
// Timing: combinational, sampled 1 ns after each change. The packing trick comes from the
// source design's DSP packing; the field layout checked here is this design's own.
`timescale 1ns/1ps
module tb_dsp_pack;
  import lm_pkg::*;
  int checks = 0, failures = 0;
  int4_t act, w_hi, w_lo;
  int8_t p_hi, p_lo;
  dsp_pack dut (.act, .w_hi, .w_lo, .p_hi, .p_lo);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = -8; a < 8; a++)
      for (int h = -8; h < 8; h++)
        for (int l = -8; l < 8; l++) begin
          act = 4'(a); w_hi = 4'(h); w_lo = 4'(l);
          #1;
          checks += 2;
          if (int'(p_hi) != a * h) begin failures++; if (failures < 5) $display("hi %0d*%0d got %0d", a, h, p_hi); end
          if (int'(p_lo) != a * l) begin failures++; if (failures < 5) $display("lo %0d*%0d got %0d", a, l, p_lo); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
