// emu: element-wise multiplication unit of the SSM unit.
// LANES independent INT8 x INT8 multipliers; each 16-bit product is re-quantised back to INT8
// by an arithmetic right shift (round half up, saturate). Because all SSM tensors use
// power-of-two scales, re-quantisation is a shift instead of a multiplication, which is the
// point of the paper's PoT SSM quantisation. Rounding and saturation are this design's choice.
// Timing: one registered stage, out valid one cycle after in_valid.
module emu
  import lm_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  int8_t      a     [LANES],
  input  int8_t      b     [LANES],
  input  logic [4:0] shift,
  output logic       out_valid,
  output int8_t      y     [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) y[l] <= '0;
    end else begin
      out_valid <= in_valid;
      for (int l = 0; l < LANES; l++)
        y[l] <= requant8(48'(a[l]) * 48'(b[l]), shift);
    end
  end
endmodule
