// tb_mmu: random W4A4 row blocks with two quantisation groups each; compares the D_OUT
// results with a group-scaled dot product computed here, and checks the 2-cycle latency.
// How: drives one 4 x 16 weight tile and 16 activations per cycle with random group scales and
// exponents, marks group and row ends, and compares out[] with an integer reference.
// Timing: out_valid must rise exactly 2 cycles after the row's last tile. d_in x d_out MACs per
// cycle follow the source design; the scale formats and the latency are this design's choice.
`timescale 1ns/1ps
module tb_mmu;
  import lm_pkg::*;
  localparam int DI = 16, DO = 4, KLEN = 256, ROWS = 60;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic in_valid, grp_last, row_last, out_valid;
  int4_t act [DI];
  int4_t wgt [DO][DI];
  logic [7:0] w_scale [DO];
  logic [4:0] a_shift;
  int32_t out [DO];
  mmu #(.D_IN(DI), .D_OUT(DO)) dut (.*);

  int aval [KLEN];
  int wval [DO][KLEN];
  int sc   [DO][KLEN/GROUP];
  int shv  [KLEN/GROUP];
  longint ref_out [DO];
  int last_cycle, cycle;
  always @(posedge clk) cycle++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    checks++;
    if (cycle - last_cycle != 2) begin failures++; $display("latency %0d", cycle - last_cycle); end
    for (int o = 0; o < DO; o++) begin
      checks++;
      if (longint'(out[o]) != ref_out[o]) begin failures++; $display("lane %0d got %0d exp %0d", o, out[o], ref_out[o]); end
    end
  end

  initial begin
    in_valid = 0; grp_last = 0; row_last = 0; a_shift = 0;
    foreach (act[i]) act[i] = 0;
    foreach (wgt[o, i]) wgt[o][i] = 0;
    foreach (w_scale[o]) w_scale[o] = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int k = 0; k < KLEN; k++) aval[k] = int'($urandom_range(15)) - 8;
      for (int o = 0; o < DO; o++) for (int k = 0; k < KLEN; k++) wval[o][k] = int'($urandom_range(15)) - 8;
      for (int g = 0; g < KLEN/GROUP; g++) begin
        shv[g] = $urandom_range(6);
        for (int o = 0; o < DO; o++) sc[o][g] = $urandom_range(255);
      end
      for (int o = 0; o < DO; o++) begin
        ref_out[o] = 0;
        for (int g = 0; g < KLEN/GROUP; g++) begin
          longint s; s = 0;
          for (int k = g*GROUP; k < (g+1)*GROUP; k++) s += aval[k] * wval[o][k];
          ref_out[o] += s * sc[o][g] * (longint'(1) << shv[g]);
        end
      end
      for (int t = 0; t < KLEN/DI; t++) begin
        @(negedge clk);
        in_valid = 1;
        for (int i = 0; i < DI; i++) begin
          act[i] = 4'(aval[t*DI+i]);
          for (int o = 0; o < DO; o++) wgt[o][i] = 4'(wval[o][t*DI+i]);
        end
        for (int o = 0; o < DO; o++) w_scale[o] = 8'(sc[o][(t*DI)/GROUP]);
        a_shift  = 5'(shv[(t*DI)/GROUP]);
        grp_last = (((t+1)*DI) % GROUP) == 0;
        row_last = (t == KLEN/DI - 1);
        if (row_last) last_cycle = cycle + 1;
      end
      @(negedge clk); in_valid = 0; row_last = 0; grp_last = 0;
      repeat (5) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
