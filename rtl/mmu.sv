// mmu: matrix multiplication unit shared by the input and output projections.
// Each cycle it takes D_IN INT4 activations and a D_IN x D_OUT INT4 weight tile and forms all
// D_IN x D_OUT products, two per multiplier (dsp_pack), reducing each output lane with an adder
// tree. The lane sums of one quantisation group (GROUP inputs) are collected in a group partial
// sum; at the group's last tile the partial sum is scaled by the lane's unsigned weight group
// scale and by the power-of-two activation group scale (a left shift) and added to the lane
// accumulator. At the row block's last tile the D_OUT accumulators are emitted, saturated to
// INT32, and cleared. The tree and D_IN x D_OUT lanes follow the paper; the group-scaling scheme
// and register placement are this design's choices.
// Timing: fully pipelined, one tile per cycle, results 2 cycles after the last tile.
// Rule: a row block is a whole number of groups (row_last implies grp_last), checked by an
// assertion; that assertion is the only synchronous reader of rst_n (lint notes rst_n as both).
module mmu
  import lm_pkg::*;
#(
  parameter int D_IN  = MMU_DIN,
  parameter int D_OUT = MMU_DOUT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  int4_t       act     [D_IN],
  input  int4_t       wgt     [D_OUT][D_IN],
  input  logic [7:0]  w_scale [D_OUT],
  input  logic [4:0]  a_shift,
  input  logic        grp_last,
  input  logic        row_last,
  output logic        out_valid,
  output int32_t      out     [D_OUT]
);
  localparam int TW = 8 + $clog2(D_IN) + 1;

  // products: lane pairs (2j+1, 2j) share one packed multiplier per input element
  int8_t prod [D_OUT][D_IN];
  for (genvar i = 0; i < D_IN; i++) begin : g_in
    for (genvar j = 0; j < D_OUT / 2; j++) begin : g_pair
      dsp_pack u_pack (
        .act (act[i]),
        .w_hi(wgt[2*j+1][i]),
        .w_lo(wgt[2*j][i]),
        .p_hi(prod[2*j+1][i]),
        .p_lo(prod[2*j][i])
      );
    end
  end

  // adder trees
  logic signed [TW-1:0] tree [D_OUT];
  always_comb begin
    for (int o = 0; o < D_OUT; o++) begin
      tree[o] = '0;
      for (int i = 0; i < D_IN; i++) tree[o] = tree[o] + TW'(prod[o][i]);
    end
  end

  // stage 1 registers
  logic                 s1_valid, s1_grp_last, s1_row_last;
  logic [4:0]           s1_shift;
  logic [7:0]           s1_scale [D_OUT];
  logic signed [TW-1:0] s1_tree  [D_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid    <= 1'b0;
      s1_grp_last <= 1'b0;
      s1_row_last <= 1'b0;
      s1_shift    <= '0;
      for (int o = 0; o < D_OUT; o++) begin
        s1_scale[o] <= '0;
        s1_tree[o]  <= '0;
      end
    end else begin
      s1_valid    <= in_valid;
      s1_grp_last <= in_valid & grp_last;
      s1_row_last <= in_valid & row_last;
      s1_shift    <= a_shift;
      for (int o = 0; o < D_OUT; o++) begin
        s1_scale[o] <= w_scale[o];
        s1_tree[o]  <= tree[o];
      end
    end
  end

  // stage 2: group partial sums and accumulators
  logic signed [31:0] gpart [D_OUT];
  logic signed [63:0] acc   [D_OUT];
  logic signed [31:0] gsum  [D_OUT];
  logic signed [63:0] acc_n [D_OUT];

  always_comb begin
    for (int o = 0; o < D_OUT; o++) begin
      gsum[o]  = gpart[o] + 32'(s1_tree[o]);
      acc_n[o] = acc[o] + ((64'(gsum[o]) * $signed({56'd0, s1_scale[o]})) <<< s1_shift);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < D_OUT; o++) begin
        gpart[o] <= '0;
        acc[o]   <= '0;
        out[o]   <= '0;
      end
    end else begin
      out_valid <= s1_valid & s1_row_last;
      if (s1_valid) begin
        for (int o = 0; o < D_OUT; o++) begin
          if (s1_grp_last) begin
            gpart[o] <= '0;
            acc[o]   <= s1_row_last ? 64'sd0 : acc_n[o];
            if (s1_row_last)
              out[o] <= (acc_n[o] > 64'sd2147483647)  ? 32'sh7fffffff :
                        (acc_n[o] < -64'sd2147483648) ? 32'sh80000000 : 32'(acc_n[o]);
          end else begin
            gpart[o] <= gsum[o];
          end
        end
      end
    end
  end

  // a row block is a whole number of groups
  always_ff @(posedge clk) begin
    if (rst_n && in_valid && row_last)
      assert (grp_last) else $error("mmu: row_last without grp_last");
  end
endmodule
