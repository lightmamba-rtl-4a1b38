// nl_lut: table-based non-linear operator of the SSM unit (softplus, exp or SiLU) on INT8 data.
// The paper names these operators (softplus on delta, exp on delta*A, SiLU after the conv and on
// z) but does not say how they are built; here each is a 256-entry table indexed by the INT8
// input and filled at elaboration from real arithmetic, with power-of-two fixed-point formats
// (input value = in / 2^IN_FRAC, output = out / 2^OUT_FRAC, rounded and saturated to INT8).
// Timing: one registered stage; out is valid one cycle after in_valid.
module nl_lut
  import lm_pkg::*;
#(
  parameter nl_func_e FUNC     = NL_SILU,
  parameter int       IN_FRAC  = 4,
  parameter int       OUT_FRAC = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  int8_t in_data,
  output logic  out_valid,
  output int8_t out_data
);
  typedef int8_t table_t [256];

  function automatic table_t build_table();
    table_t t;
    for (int i = 0; i < 256; i++) begin
      real x, y, q;
      x = real'(i - 256 * (i / 128)) / real'(1 << IN_FRAC);
      case (FUNC)
        NL_SOFTPLUS: y = (x > 20.0) ? x : $ln(1.0 + $exp(x));
        NL_EXP:      y = $exp(x);
        default:     y = x / (1.0 + $exp(-x));
      endcase
      q = y * real'(1 << OUT_FRAC);
      q = (q >= 0.0) ? $floor(q + 0.5) : -$floor(-q + 0.5);
      if (q > 127.0) q = 127.0;
      if (q < -128.0) q = -128.0;
      t[i] = int8_t'(int'(q));
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_data  <= TABLE[8'(in_data)];
    end
  end
endmodule
