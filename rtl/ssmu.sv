// ssmu: SSM unit, the fully pipelined decode-step state-space layer of Mamba2.
// Input: the input-projection results of one token as a single INT32 element stream in the
// reordered order  delta[0..NH-1], B[0..DS-1], C[0..DS-1], then per head h: x_h[0..HD-1],
// z_h[0..HD-1]. Delta, B and C come first so that head 0 can start as soon as its x and z exist
// while the MMU keeps producing later heads (computation reordering).
//  * delta path: PoT re-quantise, + dt_bias[h], softplus -> delta[h]; delta[h] * A[h] (EMU),
//    exp -> A-bar[h]. Both are kept per head.
//  * x/B/C path: PoT re-quantise, depthwise conv1d, SiLU -> B/C buffer or the head's x buffer.
//    z: PoT re-quantise, one register, the same SiLU (shared through a mux) -> z buffer.
//  * x and z use two head buffers (ping-pong by head parity); a head's buffer counts as full
//    when its last z is stored. Input stalls (in_ready low) if the next head's buffer is still
//    full, and at the start of a token until the previous token has left the unit.
//  * tile engine: for a full head, loops p-tiles (PP rows) outer and n-tiles (NP states) inner,
//    one PP x NP tile per cycle, taking the matching h_{t-1} tile from the h_in stream:
//      B-bar = delta*B (NP lanes), A-bar*h_{t-1} (PP*NP), B-bar*x (PP*NP),
//      h_t = A-bar*h_{t-1} + B-bar*x -> h_out stream, h_t*C (PP*NP), sum over n accumulated
//      across the n-tiles -> y; y + x*D (PP lanes); y * SiLU(z) (PP lanes) -> out.
// All multiplications are EMUs with power-of-two re-quantisation (shifts in `sh`). The operator
// chain, the EMU widths (PP x NP = 2 x 8 for h-tile operators), the tile order and the on-chip
// parameter memories follow the paper's SSMU; one delta per head (Mamba2), per-tensor shift
// exponents and the head buffer handshake are this design's choices.
// Timing: one tile per cycle when h_in is valid; h_out leaves 4 cycles after a tile is issued,
// out (PP values) 8 cycles after the last n-tile of a p-tile. h_out and out have no
// back-pressure; h_in must present tiles in (head, p-tile, n-tile) order, row-major p x n.
// Lint note: the valid output of the A-bar*h multiplier (t1_v2) is left unread; it always equals
// that of the delta*B multiplier, which drives the pipeline. rst_n is also read synchronously,
// by the head-buffer assertion only.
module ssmu
  import lm_pkg::*;
#(
  parameter int NH = N_HEADS,
  parameter int HD = HEAD_DIM,
  parameter int DS = D_STATE,
  parameter int PP = SSM_PP,
  parameter int NP = SSM_NP,
  parameter int K  = D_CONV
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // on-chip parameter memories: dt_bias, A (negative), D
  input  logic                  cfg_we,
  input  ssm_cfg_e              cfg_sel,
  input  logic [$clog2(NH)-1:0] cfg_addr,
  input  int8_t                 cfg_data,
  // conv weights
  input  logic                  conv_we,
  input  logic [$clog2(NH*HD+2*DS)-1:0] conv_ch,
  input  int8_t                 conv_w [K],
  input  logic signed [15:0]    conv_b,
  input  ssm_shifts_t           sh,
  // input-projection stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  int32_t                in_data,
  // hidden state from / to off-chip memory
  input  logic                  h_in_valid,
  output logic                  h_in_ready,
  input  int8_t                 h_in  [PP*NP],
  output logic                  h_out_valid,
  output int8_t                 h_out [PP*NP],
  // gated SSM output y * SiLU(z), PP elements of one head
  output logic                  out_valid,
  output int8_t                 out_data [PP],
  output logic                  idle
);
  localparam int CH  = NH * HD + 2 * DS;
  localparam int HW  = $clog2(NH);
  localparam int CW  = $clog2(CH);
  localparam int NPT = DS / NP;   // n-tiles per p-tile
  localparam int PPT = HD / PP;   // p-tiles per head
  localparam int IW  = (DS > HD ? $clog2(DS) : $clog2(HD)) + 1;

  // ------------------------------------------------------------------ parameter memories
  int8_t dt_bias [NH];
  int8_t a_mem   [NH];
  int8_t d_mem   [NH];
  always_ff @(posedge clk) begin
    if (cfg_we) begin
      case (cfg_sel)
        CFG_DT_BIAS: dt_bias[cfg_addr] <= cfg_data;
        CFG_A:       a_mem[cfg_addr]   <= cfg_data;
        default:     d_mem[cfg_addr]   <= cfg_data;
      endcase
    end
  end

  // ------------------------------------------------------------------ input sequencer
  typedef enum logic [2:0] {S_DT, S_B, S_C, S_X, S_Z} seg_e;
  seg_e          seg;
  logic [IW-1:0] icnt;
  logic [HW-1:0] ihead;
  logic [1:0]    full;
  logic          pipe_busy;
  logic          eng_busy;
  logic          accept;
  logic          conv_ready;

  always_comb begin
    case (seg)
      S_DT:    in_ready = (icnt != 0) || (!eng_busy && !pipe_busy && full == 2'b00);
      S_X,
      S_Z:     in_ready = !full[ihead[0]];
      default: in_ready = 1'b1;
    endcase
    in_ready = in_ready && conv_ready;
    accept   = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg   <= S_DT;
      icnt  <= '0;
      ihead <= '0;
    end else if (accept) begin
      icnt <= icnt + 1'b1;
      case (seg)
        S_DT: if (icnt == IW'(NH - 1)) begin seg <= S_B; icnt <= '0; end
        S_B:  if (icnt == IW'(DS - 1)) begin seg <= S_C; icnt <= '0; end
        S_C:  if (icnt == IW'(DS - 1)) begin seg <= S_X; icnt <= '0; end
        S_X:  if (icnt == IW'(HD - 1)) begin seg <= S_Z; icnt <= '0; end
        default: if (icnt == IW'(HD - 1)) begin
          icnt <= '0;
          if (ihead == HW'(NH - 1)) begin seg <= S_DT; ihead <= '0; end
          else begin seg <= S_X; ihead <= ihead + 1'b1; end
        end
      endcase
    end
  end

  // ------------------------------------------------------------------ delta path
  logic          dt_v1;
  logic [HW-1:0] dt_h1, dt_h2, dt_h3, dt_h4;
  int8_t         dt_pre;
  logic          sp_v;
  int8_t         sp_d;
  logic          da_v;
  int8_t         da_y [1];
  logic          ex_v;
  int8_t         ex_d;
  int8_t         delta_buf [NH];
  int8_t         abar_buf  [NH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dt_v1  <= 1'b0;
      dt_pre <= '0;
      dt_h1  <= '0;
      dt_h2  <= '0;
      dt_h3  <= '0;
      dt_h4  <= '0;
    end else begin
      dt_v1  <= accept && seg == S_DT;
      dt_pre <= add8(requant8(48'(in_data), sh.in_dt), dt_bias[HW'(icnt)]);
      dt_h1  <= HW'(icnt);
      dt_h2  <= dt_h1;
      dt_h3  <= dt_h2;
      dt_h4  <= dt_h3;
    end
  end

  nl_lut #(.FUNC(NL_SOFTPLUS), .IN_FRAC(4), .OUT_FRAC(4)) u_softplus (
    .clk, .rst_n, .in_valid(dt_v1), .in_data(dt_pre), .out_valid(sp_v), .out_data(sp_d));

  int8_t da_a [1], da_b [1];
  assign da_a[0] = sp_d;
  assign da_b[0] = a_mem[dt_h2];
  emu #(.LANES(1)) u_emu_da (
    .clk, .rst_n, .in_valid(sp_v), .a(da_a), .b(da_b), .shift(sh.dt_a), .out_valid(da_v), .y(da_y));

  nl_lut #(.FUNC(NL_EXP), .IN_FRAC(4), .OUT_FRAC(7)) u_exp (
    .clk, .rst_n, .in_valid(da_v), .in_data(da_y[0]), .out_valid(ex_v), .out_data(ex_d));

  always_ff @(posedge clk) begin
    if (sp_v) delta_buf[dt_h2] <= sp_d;
    if (ex_v) abar_buf[dt_h4]  <= ex_d;
  end

  // ------------------------------------------------------------------ x / B / C / z path
  logic          cv_in_v;
  logic [CW-1:0] cv_ch;
  logic          cv_v;
  int8_t         cv_d;
  logic          z_v1;
  int8_t         z_d1;
  seg_e          k1, k2;
  logic [IW-1:0] i1, i2;
  logic          b1, b2;
  logic          si_v;
  int8_t         si_d;

  always_comb begin
    cv_in_v = accept && (seg == S_B || seg == S_C || seg == S_X);
    case (seg)
      S_B:     cv_ch = CW'(NH * HD) + CW'(icnt);
      S_C:     cv_ch = CW'(NH * HD + DS) + CW'(icnt);
      default: cv_ch = CW'(ihead) * CW'(HD) + CW'(icnt);
    endcase
  end

  conv1d #(.CH(CH), .K(K)) u_conv (
    .clk, .rst_n,
    .cfg_we(conv_we), .cfg_ch(conv_ch), .cfg_w(conv_w), .cfg_b(conv_b),
    .in_valid(cv_in_v), .in_ready(conv_ready), .in_ch(cv_ch), .in_data(requant8(48'(in_data), sh.in_xbc)),
    .shift(sh.conv), .out_valid(cv_v), .out_data(cv_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_v1 <= 1'b0;
      z_d1 <= '0;
      k1   <= S_DT;
      k2   <= S_DT;
      i1   <= '0;
      i2   <= '0;
      b1   <= 1'b0;
      b2   <= 1'b0;
    end else begin
      z_v1 <= accept && seg == S_Z;
      z_d1 <= requant8(48'(in_data), sh.in_z);
      k1   <= seg;
      i1   <= icnt;
      b1   <= ihead[0];
      k2   <= k1;
      i2   <= i1;
      b2   <= b1;
    end
  end

  // conv output and z never arrive in the same cycle: they follow the input order
  nl_lut #(.FUNC(NL_SILU), .IN_FRAC(4), .OUT_FRAC(4)) u_silu (
    .clk, .rst_n, .in_valid(cv_v || z_v1), .in_data(z_v1 ? z_d1 : cv_d),
    .out_valid(si_v), .out_data(si_d));

  int8_t b_buf [DS];
  int8_t c_buf [DS];
  int8_t x_buf [2][HD];
  int8_t z_buf [2][HD];
  logic  set_full;
  always_ff @(posedge clk) begin
    if (si_v) begin
      case (k2)
        S_B:     b_buf[i2[$clog2(DS)-1:0]] <= si_d;
        S_C:     c_buf[i2[$clog2(DS)-1:0]] <= si_d;
        S_X:     x_buf[b2][i2[$clog2(HD)-1:0]] <= si_d;
        default: z_buf[b2][i2[$clog2(HD)-1:0]] <= si_d;
      endcase
    end
  end
  assign set_full = si_v && k2 == S_Z && i2 == IW'(HD - 1);

  assign pipe_busy = dt_v1 || sp_v || da_v || ex_v || cv_v || z_v1 || si_v;

  // ------------------------------------------------------------------ tile engine
  logic [HW-1:0]               eh;
  logic [$clog2(PPT+1)-1:0]    ept;
  logic [$clog2(NPT+1)-1:0]    ent;
  logic                        issue;
  logic                        last_tile;
  logic                        clr_full;

  assign h_in_ready = full[eh[0]];
  assign issue      = h_in_valid && h_in_ready;
  assign last_tile  = (ept == ($clog2(PPT+1))'(PPT - 1)) && (ent == ($clog2(NPT+1))'(NPT - 1));
  assign clr_full   = issue && last_tile;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 2'b00;
    end else begin
      for (int b = 0; b < 2; b++) begin
        if (set_full && b2 == b[0])            full[b] <= 1'b1;
        else if (clr_full && eh[0] == b[0])    full[b] <= 1'b0;
      end
    end
  end

  // T0: operand capture
  logic  t0_v, t0_first, t0_last;
  int8_t t0_h [PP*NP];
  int8_t t0_b [NP], t0_c [NP];
  int8_t t0_x [PP], t0_z [PP];
  int8_t t0_dl, t0_ab, t0_dd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eh       <= '0;
      ept      <= '0;
      ent      <= '0;
      t0_v     <= 1'b0;
      t0_first <= 1'b0;
      t0_last  <= 1'b0;
      t0_dl    <= '0;
      t0_ab    <= '0;
      t0_dd    <= '0;
      for (int i = 0; i < PP*NP; i++) t0_h[i] <= '0;
      for (int n = 0; n < NP; n++) begin t0_b[n] <= '0; t0_c[n] <= '0; end
      for (int p = 0; p < PP; p++) begin t0_x[p] <= '0; t0_z[p] <= '0; end
    end else begin
      t0_v <= issue;
      if (issue) begin
        t0_first <= (ent == 0);
        t0_last  <= (ent == ($clog2(NPT+1))'(NPT - 1));
        t0_dl    <= delta_buf[eh];
        t0_ab    <= abar_buf[eh];
        t0_dd    <= d_mem[eh];
        for (int i = 0; i < PP*NP; i++) t0_h[i] <= h_in[i];
        for (int n = 0; n < NP; n++) begin
          t0_b[n] <= b_buf[$clog2(DS)'(ent * NP + n)];
          t0_c[n] <= c_buf[$clog2(DS)'(ent * NP + n)];
        end
        for (int p = 0; p < PP; p++) begin
          t0_x[p] <= x_buf[eh[0]][$clog2(HD)'(ept * PP + p)];
          t0_z[p] <= z_buf[eh[0]][$clog2(HD)'(ept * PP + p)];
        end
        if (ent == ($clog2(NPT+1))'(NPT - 1)) begin
          ent <= '0;
          if (ept == ($clog2(PPT+1))'(PPT - 1)) begin
            ept <= '0;
            eh  <= (eh == HW'(NH - 1)) ? '0 : eh + 1'b1;
          end else begin
            ept <= ept + 1'b1;
          end
        end else begin
          ent <= ent + 1'b1;
        end
      end
    end
  end

  // T1: delta*B and A-bar*h_{t-1}
  int8_t e_dl [NP], e_ab [PP*NP];
  int8_t t1_db [NP], t1_ah [PP*NP];
  logic  t1_v, t1_v2;   // t1_v2 equals t1_v (same input valid): left unread
  always_comb begin
    for (int n = 0; n < NP; n++)    e_dl[n] = t0_dl;
    for (int i = 0; i < PP*NP; i++) e_ab[i] = t0_ab;
  end
  emu #(.LANES(NP)) u_emu_db (
    .clk, .rst_n, .in_valid(t0_v), .a(e_dl), .b(t0_b), .shift(sh.dt_b), .out_valid(t1_v), .y(t1_db));
  emu #(.LANES(PP*NP)) u_emu_ah (
    .clk, .rst_n, .in_valid(t0_v), .a(e_ab), .b(t0_h), .shift(sh.ah), .out_valid(t1_v2), .y(t1_ah));

  logic  t1_first, t1_last;
  int8_t t1_c [NP], t1_x [PP], t1_z [PP], t1_dd;
  always_ff @(posedge clk) begin
    t1_first <= t0_first; t1_last <= t0_last; t1_c <= t0_c; t1_x <= t0_x; t1_z <= t0_z; t1_dd <= t0_dd;
  end

  // T2: B-bar * x
  int8_t e_bb [PP*NP], e_bx [PP*NP], t2_bx [PP*NP];
  logic  t2_v;
  always_comb begin
    for (int p = 0; p < PP; p++)
      for (int n = 0; n < NP; n++) begin
        e_bb[p*NP+n] = t1_db[n];
        e_bx[p*NP+n] = t1_x[p];
      end
  end
  emu #(.LANES(PP*NP)) u_emu_bx (
    .clk, .rst_n, .in_valid(t1_v), .a(e_bb), .b(e_bx), .shift(sh.bx), .out_valid(t2_v), .y(t2_bx));

  logic  t2_first, t2_last;
  int8_t t2_ah [PP*NP], t2_c [NP], t2_x [PP], t2_z [PP], t2_dd;
  always_ff @(posedge clk) begin
    t2_first <= t1_first; t2_last <= t1_last; t2_ah <= t1_ah; t2_c <= t1_c; t2_x <= t1_x;
    t2_z <= t1_z; t2_dd <= t1_dd;
  end

  // T3: h_t = A-bar*h_{t-1} + B-bar*x
  logic  t3_v, t3_first, t3_last;
  int8_t t3_h [PP*NP], t3_c [NP], t3_x [PP], t3_z [PP], t3_dd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t3_v <= 1'b0;
    else        t3_v <= t2_v;
  end
  always_ff @(posedge clk) begin
    for (int i = 0; i < PP*NP; i++) t3_h[i] <= add8(t2_ah[i], t2_bx[i]);
    t3_first <= t2_first; t3_last <= t2_last; t3_c <= t2_c; t3_x <= t2_x; t3_z <= t2_z;
    t3_dd <= t2_dd;
  end
  assign h_out_valid = t3_v;
  assign h_out       = t3_h;

  // T4: h_t * C
  int8_t e_c [PP*NP], t4_hc [PP*NP];
  logic  t4_v;
  always_comb begin
    for (int p = 0; p < PP; p++)
      for (int n = 0; n < NP; n++) e_c[p*NP+n] = t3_c[n];
  end
  emu #(.LANES(PP*NP)) u_emu_hc (
    .clk, .rst_n, .in_valid(t3_v), .a(t3_h), .b(e_c), .shift(sh.hc), .out_valid(t4_v), .y(t4_hc));

  logic  t4_first, t4_last;
  int8_t t4_x [PP], t4_z [PP], t4_dd;
  always_ff @(posedge clk) begin
    t4_first <= t3_first; t4_last <= t3_last; t4_x <= t3_x; t4_z <= t3_z; t4_dd <= t3_dd;
  end

  // T5: accumulator over n
  logic signed [31:0] yacc [PP];
  logic signed [31:0] ysum [PP];
  logic               t5_v;
  int8_t              t5_x [PP], t5_z [PP], t5_dd [PP];
  always_comb begin
    for (int p = 0; p < PP; p++) begin
      ysum[p] = t4_first ? 32'sd0 : yacc[p];
      for (int n = 0; n < NP; n++) ysum[p] = ysum[p] + 32'(t4_hc[p*NP+n]);
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t5_v <= 1'b0;
      for (int p = 0; p < PP; p++) yacc[p] <= '0;
    end else begin
      t5_v <= t4_v && t4_last;
      if (t4_v) for (int p = 0; p < PP; p++) yacc[p] <= ysum[p];
    end
  end
  always_ff @(posedge clk) begin
    t5_x <= t4_x; t5_z <= t4_z;
    for (int p = 0; p < PP; p++) t5_dd[p] <= t4_dd;
  end

  // T6: x*D, y re-quantised
  int8_t t6_xd [PP];
  logic  t6_v;
  int8_t t6_y [PP], t6_z [PP];
  emu #(.LANES(PP)) u_emu_xd (
    .clk, .rst_n, .in_valid(t5_v), .a(t5_x), .b(t5_dd), .shift(sh.xd), .out_valid(t6_v), .y(t6_xd));
  always_ff @(posedge clk) begin
    for (int p = 0; p < PP; p++) t6_y[p] <= requant8(48'(yacc[p]), sh.y);
    t6_z <= t5_z;
  end

  // T7: (y + x*D) * SiLU(z)
  int8_t e_y [PP];
  always_comb for (int p = 0; p < PP; p++) e_y[p] = add8(t6_y[p], t6_xd[p]);
  emu #(.LANES(PP)) u_emu_yz (
    .clk, .rst_n, .in_valid(t6_v), .a(e_y), .b(t6_z), .shift(sh.yz), .out_valid(out_valid), .y(out_data));

  assign eng_busy = t0_v || t1_v || t2_v || t3_v || t4_v || t5_v || t6_v || out_valid || eh != 0;
  assign idle     = !eng_busy && !pipe_busy && full == 2'b00 && seg == S_DT && icnt == 0;

  // a head buffer is never filled and released in the same cycle
  always_ff @(posedge clk) begin
    if (rst_n && set_full && clr_full)
      assert (b2 != eh[0]) else $error("ssmu: head buffer set and cleared together");
  end
endmodule
