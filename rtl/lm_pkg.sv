// lm_pkg: dimensions, widths and shared types of the Mamba2 decode accelerator.
// The model dimensions are those of Mamba2-2.7B (d_model 2560, d_inner 5120 = 80 heads x 64,
// state size 128, conv width 4). The quantisation group size of 128 follows the W4A4 scheme
// (per-group weight and activation quantisation). The MMU shape (16 x 4) is this design's own
// choice: 64 four-bit weights per cycle match a 12 GB/s weight stream at 400 MHz.
// Linted on its own, the package reports its parameters as unused; the modules use them.
package lm_pkg;
  parameter int D_MODEL  = 2560;
  parameter int D_INNER  = 5120;
  parameter int N_HEADS  = 80;
  parameter int HEAD_DIM = 64;
  parameter int D_STATE  = 128;
  parameter int D_CONV   = 4;
  parameter int GROUP    = 128;
  parameter int MMU_DIN  = 16;
  parameter int MMU_DOUT = 4;
  parameter int SSM_PP   = 2;   // tile size along the head dimension p
  parameter int SSM_NP   = 8;   // tile size along the state dimension n

  typedef logic signed [3:0]  int4_t;
  typedef logic signed [7:0]  int8_t;
  typedef logic signed [31:0] int32_t;

  // Non-linear operators of the SSM unit
  typedef enum logic [1:0] {NL_SOFTPLUS = 2'd0, NL_EXP = 2'd1, NL_SILU = 2'd2} nl_func_e;

  // Kind of an input-projection output element, in the reordered row order
  typedef enum logic [1:0] {K_DT = 2'd0, K_BC = 2'd1, K_X = 2'd2, K_Z = 2'd3} ip_kind_e;

  // Power-of-two re-quantisation exponents of the SSM unit (right shifts)
  typedef struct packed {
    logic [4:0] in_dt;    // in-proj INT32 -> INT8 for delta
    logic [4:0] in_xbc;   // in-proj INT32 -> INT8 for x, B, C (conv input)
    logic [4:0] in_z;     // in-proj INT32 -> INT8 for z
    logic [4:0] conv;     // conv accumulator -> INT8
    logic [4:0] dt_a;     // delta * A -> exp input
    logic [4:0] dt_b;     // delta * B -> B-bar
    logic [4:0] bx;       // B-bar * x -> h units
    logic [4:0] ah;       // A-bar * h_{t-1} -> h units
    logic [4:0] hc;       // h_t * C -> y partial
    logic [4:0] y;        // accumulated y -> INT8
    logic [4:0] xd;       // x * D -> y units
    logic [4:0] yz;       // y * silu(z) -> output
  } ssm_shifts_t;

  // Round half up, arithmetic right shift, saturate to INT8
  function automatic int8_t requant8(input logic signed [47:0] v, input logic [4:0] sh);
    logic signed [47:0] r;
    r = (sh == 5'd0) ? v : ((v + (48'sd1 <<< (sh - 5'd1))) >>> sh);
    if (r > 48'sd127)       return 8'sd127;
    else if (r < -48'sd128) return -8'sd128;
    else                    return int8_t'(r);
  endfunction

  // Saturating INT8 addition
  function automatic int8_t add8(input int8_t a, input int8_t b);
    logic signed [8:0] s;
    s = 9'(a) + 9'(b);
    if (s > 9'sd127)       return 8'sd127;
    else if (s < -9'sd128) return -8'sd128;
    else                   return int8_t'(s);
  endfunction

  // Configuration memories of the SSM unit
  typedef enum logic [1:0] {CFG_DT_BIAS = 2'd0, CFG_A = 2'd1, CFG_D = 2'd2} ssm_cfg_e;
endpackage
