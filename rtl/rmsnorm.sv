// rmsnorm: RMS normalisation of an N-element INT32 vector, with optional per-channel gain.
// y_i = x_i / sqrt(mean(x^2)) [* g_i], output in signed fixed point with FRAC fraction bits.
// The first RMSNorm of a Mamba block has its gain folded into the input-projection weights by the
// rotation scheme, so it runs with USE_GAIN = 0; the second keeps its gain (USE_GAIN = 1, gain
// words in Q.GFRAC loaded through the g_* port) because folding it would raise the weight
// quantisation error. The paper does not give the unit's insides. Here: the vector is buffered
// while the sum of squares is accumulated; then three bit-serial steps compute the mean
// (division by N), the integer square root r of the mean scaled up by an even power of two
// 4^s (so that r keeps about 31 significant bits) and inv = 2^62 / r; finally each element is
// multiplied by inv (and the gain), shifted right by 62 - s - FRAC (+ GFRAC) and saturated.
// Timing: N input cycles (in_ready high), about 80 + 32 + 63 cycles of arithmetic, then N
// output elements, one per cycle while out_ready is high (valid/ready: an element is taken
// in a cycle where out_valid and out_ready are both high).
module rmsnorm #(
  parameter int N        = 5120,
  parameter int IW       = 32,
  parameter int OW       = 16,
  parameter int FRAC     = 10,
  parameter bit USE_GAIN = 1'b1,
  parameter int GFRAC    = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  // gain memory write port
  input  logic                g_we,
  input  logic [$clog2(N)-1:0] g_addr,
  input  logic signed [15:0]  g_data,
  // vector in
  input  logic                in_valid,
  output logic                in_ready,
  input  logic signed [IW-1:0] in_data,
  // normalised vector out
  output logic                out_valid,
  input  logic                out_ready,
  output logic signed [OW-1:0] out_data,
  output logic                out_last
);
  localparam int AW = $clog2(N);
  localparam int K  = 62;   // inv = 2^K / rms

  typedef enum logic [2:0] {LOAD, DIV_N, SQRT, DIV_R, SET_INV, EMIT} state_e;
  state_e state;

  logic signed [IW-1:0] buffer [N];
  logic signed [15:0]   gain   [N];
  logic [AW-1:0]        idx;
  logic [79:0]          sumsq;
  // shared bit-serial registers
  logic [79:0]          num;
  logic [79:0]          rem;
  logic [63:0]          quo;
  logic [6:0]           step;
  logic [63:0]          sq_m, sq_res, sq_bit;
  logic [63:0]          inv;
  logic [4:0]           nsh;      // normalisation: sqrt taken of mean * 4^nsh

  // largest n with m * 4^n < 2^64
  function automatic logic [4:0] norm_shift(input logic [63:0] m);
    logic [4:0] n;
    n = 5'd31;
    for (int b = 0; b < 64; b++) if (m[b]) n = 5'((63 - b) / 2);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (g_we) gain[g_addr] <= g_data;
  end

  assign in_ready = (state == LOAD);

  // output datapath
  logic signed [IW+64:0]  scaled;
  logic signed [IW+64+16:0] gained;
  logic signed [IW+64+16:0] outv;
  always_comb begin
    scaled = (IW+65)'(buffer[idx]) * $signed({1'b0, inv});
    gained = USE_GAIN ? (IW+81)'(scaled) * (IW+81)'(gain[idx]) : (IW+81)'(scaled);
    outv   = gained >>> (7'(K - FRAC + (USE_GAIN ? GFRAC : 0)) - 7'(nsh));
  end

  logic [80:0] rem_sh;
  always_comb rem_sh = {rem, num[79]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= LOAD;
      idx       <= '0;
      sumsq     <= '0;
      num       <= '0;
      rem       <= '0;
      quo       <= '0;
      step      <= '0;
      sq_m      <= '0;
      sq_res    <= '0;
      sq_bit    <= '0;
      inv       <= '0;
      nsh       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_ready) begin
        out_valid <= 1'b0;
        out_last  <= 1'b0;
      end
      case (state)
        LOAD: if (in_valid) begin
          buffer[idx] <= in_data;
          sumsq       <= ((idx == 0) ? 80'd0 : sumsq) + 80'(64'(in_data) * 64'(in_data));
          idx         <= (idx == AW'(N - 1)) ? '0 : idx + 1'b1;
          if (idx == AW'(N - 1)) begin
            state <= DIV_N;
            step  <= '0;
            rem   <= '0;
            quo   <= '0;
          end
        end
        DIV_N: begin
          // restoring division sumsq / N, one quotient bit per cycle
          if (step == 0) num <= sumsq;
          if (step != 0) begin
            if (rem_sh >= 81'(N)) begin
              rem <= 80'(rem_sh - 81'(N));
              quo <= {quo[62:0], 1'b1};
            end else begin
              rem <= 80'(rem_sh);
              quo <= {quo[62:0], 1'b0};
            end
            num <= {num[78:0], 1'b0};
          end
          step <= step + 1'b1;
          if (step == 7'd80) begin
            state  <= SQRT;
            step   <= '0;
          end
        end
        SQRT: begin
          // bit-serial integer square root of the mean
          if (step == 0) begin
            nsh    <= norm_shift(quo);
            sq_m   <= quo << (2 * norm_shift(quo));
            sq_res <= '0;
            sq_bit <= 64'd1 << 62;
          end else begin
            if (sq_m >= sq_res + sq_bit) begin
              sq_m   <= sq_m - (sq_res + sq_bit);
              sq_res <= (sq_res >> 1) + sq_bit;
            end else begin
              sq_res <= sq_res >> 1;
            end
            sq_bit <= sq_bit >> 2;
          end
          step <= step + 1'b1;
          if (step == 7'd32) begin
            state <= DIV_R;
            step  <= '0;
          end
        end
        DIV_R: begin
          // inv = 2^K / max(r, 1)
          if (step == 0) begin
            num    <= 80'd1 << (K + 80 - 63);
            rem    <= '0;
            quo    <= '0;
            if (sq_res == 0) sq_res <= 64'd1;
          end else begin
            if (rem_sh >= 81'(sq_res)) begin
              rem <= 80'(rem_sh - 81'(sq_res));
              quo <= {quo[62:0], 1'b1};
            end else begin
              rem <= 80'(rem_sh);
              quo <= {quo[62:0], 1'b0};
            end
            num <= {num[78:0], 1'b0};
          end
          step <= step + 1'b1;
          if (step == 7'd63) begin
            state <= SET_INV;
            idx   <= '0;
          end
        end
        SET_INV: begin
          inv   <= quo;
          state <= EMIT;
        end
        default: begin
          if (!out_valid || out_ready) begin
            out_valid <= 1'b1;
            out_data  <= (outv > (IW+81)'((1 << (OW - 1)) - 1)) ? OW'((1 << (OW - 1)) - 1) :
                         (outv < -(IW+81)'(1 << (OW - 1)))     ? OW'(-(1 << (OW - 1))) : OW'(outv);
            out_last  <= (idx == AW'(N - 1));
            idx       <= (idx == AW'(N - 1)) ? '0 : idx + 1'b1;
            if (idx == AW'(N - 1)) state <= LOAD;
          end
        end
      endcase
    end
  end
endmodule
