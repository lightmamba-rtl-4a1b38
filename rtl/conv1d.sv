// conv1d: depthwise causal 1-D convolution of the SSM input for one decode step.
// For each channel c of the x, B and C part of the input projection the unit keeps the last
// K-1 inputs on chip and computes
//   acc = bias[c] + sum_{k<K-1} w[c][k] * state[c][k] + w[c][K-1] * x,
// re-quantises acc to INT8 by a power-of-two shift and shifts x into the channel's state.
// Channels arrive one per cycle in any order, each with its index. The paper only names the
// convolution; the width K = 4 is Mamba2's, INT8 weights and data with a PoT shift are this
// design's choice. Weights, biases and state are RAMs (one word per channel). After reset the
// unit walks all channels once to clear the state; in_ready is low during those CH cycles.
// Timing: one registered stage, out valid one cycle after in_valid.
module conv1d
  import lm_pkg::*;
#(
  parameter int CH = D_INNER + 2 * D_STATE,
  parameter int K  = D_CONV
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration: weights (K INT8 per channel) and INT16 bias in accumulator units
  input  logic                  cfg_we,
  input  logic [$clog2(CH)-1:0] cfg_ch,
  input  int8_t                 cfg_w [K],
  input  logic signed [15:0]    cfg_b,
  // data
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [$clog2(CH)-1:0] in_ch,
  input  int8_t                 in_data,
  input  logic [4:0]            shift,
  output logic                  out_valid,
  output int8_t                 out_data
);
  localparam int CW = $clog2(CH);

  logic [K*8-1:0]     wmem [CH];
  logic signed [15:0] bmem [CH];
  logic [(K-1)*8-1:0] smem [CH];   // state, oldest input in the low byte

  logic [CW-1:0] clr_ch;
  logic          clearing;

  assign in_ready = !clearing;

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      for (int k = 0; k < K; k++) wmem[cfg_ch][k*8 +: 8] <= cfg_w[k];
      bmem[cfg_ch] <= cfg_b;
    end
  end

  logic [K*8-1:0]     w_word;
  logic [(K-1)*8-1:0] s_word;
  logic signed [47:0] acc;
  always_comb begin
    w_word = wmem[in_ch];
    s_word = smem[in_ch];
    acc = 48'(bmem[in_ch]) + 48'($signed(w_word[(K-1)*8 +: 8])) * 48'(in_data);
    for (int k = 0; k < K - 1; k++)
      acc = acc + 48'($signed(w_word[k*8 +: 8])) * 48'($signed(s_word[k*8 +: 8]));
  end

  always_ff @(posedge clk) begin
    if (clearing)      smem[clr_ch] <= '0;
    else if (in_valid) smem[in_ch]  <= {in_data, s_word[(K-1)*8-1:8]};   // needs K >= 3
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing  <= 1'b1;
      clr_ch    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (clearing) begin
        clr_ch <= clr_ch + 1'b1;
        if (clr_ch == CW'(CH - 1)) clearing <= 1'b0;
      end
      out_valid <= in_valid && !clearing;
      if (in_valid) out_data <= requant8(acc, shift);
    end
  end
endmodule
