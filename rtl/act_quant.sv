// act_quant: per-group INT4 activation quantiser placed in front of each projection.
// Elements arrive one per cycle; a group of GSIZE elements is buffered while its largest
// magnitude is tracked. The group's power-of-two exponent is the smallest shift that brings
// that magnitude into 3 bits (shift = bit length - 3, at least 0); each element is then shifted
// with rounding and saturated to [-8, 7] and streamed out together with the exponent. Group size
// 128 and 4-bit activations follow the paper's W4A4 scheme; the power-of-two scale is this
// design's choice. Timing: in_ready drops while a group is being emitted (GSIZE cycles); the
// first element of a group leaves 2 cycles after its last element entered.
module act_quant
  import lm_pkg::*;
#(
  parameter int GSIZE = GROUP,
  parameter int IW    = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [IW-1:0] in_data,
  output logic                out_valid,
  output int4_t               out_data,
  output logic [4:0]          out_shift,
  output logic                out_last
);
  localparam int GW = $clog2(GSIZE);

  logic signed [IW-1:0] buffer [GSIZE];
  logic [IW-1:0]        maxabs;
  logic [GW-1:0]        wcnt, rcnt;
  typedef enum logic [1:0] {FILL, SCALE, EMIT} state_e;
  state_e state;

  logic [IW-1:0] mag;
  always_comb mag = in_data[IW-1] ? IW'(-in_data) : IW'(in_data);

  function automatic logic [4:0] shift_of(input logic [IW-1:0] m);
    int bl;
    bl = 0;
    for (int b = 0; b < IW; b++) if (m[b]) bl = b + 1;
    return (bl > 3) ? 5'(bl - 3) : 5'd0;
  endfunction

  function automatic int4_t quant(input logic signed [IW-1:0] v, input logic [4:0] s);
    logic signed [IW:0] r;
    r = (s == 0) ? (IW+1)'(v) : (((IW+1)'(v) + ((IW+1)'(1) <<< (s - 1))) >>> s);
    if (r > 7)       return 4'sd7;
    else if (r < -8) return -4'sd8;
    else             return int4_t'(r);
  endfunction

  assign in_ready = (state == FILL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= FILL;
      maxabs    <= '0;
      wcnt      <= '0;
      rcnt      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_shift <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      case (state)
        FILL: if (in_valid) begin
          buffer[wcnt] <= in_data;
          maxabs       <= (wcnt == 0) ? mag : ((mag > maxabs) ? mag : maxabs);
          wcnt         <= wcnt + 1'b1;
          if (wcnt == GW'(GSIZE - 1)) state <= SCALE;
        end
        SCALE: begin
          out_shift <= shift_of(maxabs);
          rcnt      <= '0;
          state     <= EMIT;
        end
        default: begin
          out_valid <= 1'b1;
          out_data  <= quant(buffer[rcnt], out_shift);
          out_last  <= (rcnt == GW'(GSIZE - 1));
          rcnt      <= rcnt + 1'b1;
          if (rcnt == GW'(GSIZE - 1)) state <= FILL;
        end
      endcase
    end
  end
endmodule
