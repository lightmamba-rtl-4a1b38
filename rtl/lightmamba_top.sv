// lightmamba_top: decode-step accelerator for one Mamba2 block, W4A4 linear layers with an
// INT8 power-of-two SSM.
// Per token and layer the host streams the residual x_l (D_MODEL INT32) in; the unit returns
// x_{l+1} = x_l + out_proj(...) in D_OUT-wide beats. Dataflow:
//   x_l -> RMSNorm (gain folded into W_in) -> per-group INT4 quantiser -> MMU input projection
//   -> SSMU (conv1d, SiLU, SSM, gating) -> RMSNorm with gain -> HTU (online 5120-point
//   Hadamard rotation) -> per-group INT4 quantiser -> MMU output projection -> + x_l.
// The MMU is shared in time by the two projections. Its weights arrive on the w_* stream
// (from DMA) in the order the MMU consumes them: row blocks of D_OUT rows, each as
// D_MODEL/D_IN (in-proj) or D_INNER/D_IN (out-proj) tiles. Input-projection rows are ordered
// delta (NH), B (DS), C (DS), then x_h (HD) and z_h (HD) per head h: this computation
// reordering lets the SSMU work on head h while the MMU produces head h+1. The SSM hidden
// state streams in and out through h_in / h_out (off-chip, one PP x NP tile per beat).
// The block structure follows the paper; the phase controller, the stream handshakes and the
// order of the input-projection rows as the carrier of the reordering are this design's.
// Handshakes: x_in, w and h_in are valid/ready; y_out and h_out have no back-pressure.
// start begins a token when idle; done pulses with the last y_out beat.
// Lint notes: the two RMSNorm out_last flags are left unread because the phase controller counts
// elements itself; rst_n is read synchronously only by the queue-overrun assertion.
module lightmamba_top
  import lm_pkg::*;
#(
  parameter int D_MODEL_P = D_MODEL,
  parameter int NH        = N_HEADS,
  parameter int HD        = HEAD_DIM,
  parameter int DS        = D_STATE,
  parameter int SEGS      = 40,
  parameter int SEG_LEN   = 128,
  parameter int DI        = MMU_DIN,
  parameter int DO        = MMU_DOUT,
  parameter int PP        = SSM_PP,
  parameter int NP        = SSM_NP
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // configuration
  input  ssm_shifts_t            sh,
  input  logic [4:0]             op_shift,
  input  logic                   ssm_cfg_we,
  input  ssm_cfg_e               ssm_cfg_sel,
  input  logic [$clog2(NH)-1:0]  ssm_cfg_addr,
  input  int8_t                  ssm_cfg_data,
  input  logic                   conv_we,
  input  logic [$clog2(NH*HD+2*DS)-1:0] conv_ch,
  input  int8_t                  conv_w [D_CONV],
  input  logic signed [15:0]     conv_b,
  input  logic                   g_we,
  input  logic [$clog2(NH*HD)-1:0] g_addr,
  input  logic signed [15:0]     g_data,
  // residual in
  input  logic                   x_valid,
  output logic                   x_ready,
  input  int32_t                 x_data,
  // weight stream
  input  logic                   w_valid,
  output logic                   w_ready,
  input  int4_t                  w_data  [DO][DI],
  input  logic [7:0]             w_scale [DO],
  // hidden state
  input  logic                   h_in_valid,
  output logic                   h_in_ready,
  input  int8_t                  h_in  [PP*NP],
  output logic                   h_out_valid,
  output int8_t                  h_out [PP*NP],
  // residual out
  output logic                   y_valid,
  output int32_t                 y_data [DO]
);
  localparam int DINNER  = NH * HD;
  localparam int ROWS_IN = NH + 2 * DS + 2 * DINNER;
  localparam int HW      = 16 + $clog2(SEG_LEN) + $clog2(SEGS);   // HTU output width
  localparam int AW      = $clog2(DINNER);
  localparam int KW      = $clog2(DINNER / DI + 1);
  localparam int RW      = $clog2(ROWS_IN / DO + 1);

  typedef enum logic [2:0] {PH_IDLE, PH_NORM1, PH_INPROJ, PH_ROT, PH_QUANT2, PH_OUTPROJ} phase_e;
  phase_e phase;

  // ---------------------------------------------------------------- buffers
  int32_t     resid  [D_MODEL_P];
  int4_t      a4     [DINNER];
  logic [4:0] ashift [DINNER / GROUP];
  logic signed [HW-1:0] obuf [DINNER];

  // ---------------------------------------------------------------- RMSNorm 1 + quantiser 1
  logic                 r1_in_ready, r1_v, r1_last;
  logic signed [15:0]   r1_d;
  logic                 q_in_valid, q_in_ready;
  logic signed [HW-1:0] q_in_data;
  logic                 q_v, q_last;
  int4_t                q_d;
  logic [4:0]           q_sh;
  logic [AW-1:0]        x_cnt, q_cnt;

  assign x_ready = (phase == PH_NORM1) && r1_in_ready && (x_cnt != AW'(D_MODEL_P));

  rmsnorm #(.N(D_MODEL_P), .IW(32), .OW(16), .FRAC(10), .USE_GAIN(1'b0)) u_rms1 (
    .clk, .rst_n, .g_we(1'b0), .g_addr('0), .g_data('0),
    .in_valid(x_valid && x_ready), .in_ready(r1_in_ready), .in_data(x_data),
    .out_valid(r1_v), .out_ready(q_in_ready && phase == PH_NORM1), .out_data(r1_d), .out_last(r1_last));

  // one quantiser serves both projections: first the normalised residual, later the rotated y
  logic                 q2_valid;
  logic [AW-1:0]        q2_rd;
  assign q_in_valid = (phase == PH_NORM1) ? r1_v : q2_valid;
  assign q_in_data  = (phase == PH_NORM1) ? HW'(r1_d) : obuf[q2_rd];
  assign q2_valid   = (phase == PH_QUANT2);

  act_quant #(.GSIZE(GROUP), .IW(HW)) u_quant (
    .clk, .rst_n, .in_valid(q_in_valid), .in_ready(q_in_ready), .in_data(q_in_data),
    .out_valid(q_v), .out_data(q_d), .out_shift(q_sh), .out_last(q_last));

  always_ff @(posedge clk) begin
    if (q_v) begin
      a4[q_cnt] <= q_d;
      if (q_last) ashift[32'(q_cnt) / GROUP] <= q_sh;
    end
    if (x_valid && x_ready) resid[x_cnt[$clog2(D_MODEL_P)-1:0]] <= x_data;
  end

  // ---------------------------------------------------------------- MMU and its sequencer
  logic          m_issue, m_v;
  int32_t        m_out [DO];
  logic [KW-1:0] kstep, klast;
  logic [RW-1:0] rblk, rlast;
  logic          row_last, grp_last;
  logic [1:0]    m_pending;
  int4_t         m_act [DI];
  int32_t        ser   [DO];
  logic [$clog2(DO+1)-1:0] ser_cnt;
  logic          s_in_ready;
  logic          mmu_phase;
  logic          all_issued;   // every row block of the current projection has been issued
  logic [RW-1:0] rblk_prev;    // row block whose results leave the MMU now
  assign rblk_prev = (rblk == '0) ? rlast : rblk - 1'b1;

  assign mmu_phase = (phase == PH_INPROJ || phase == PH_OUTPROJ);
  assign klast     = (phase == PH_INPROJ) ? KW'(D_MODEL_P / DI - 1) : KW'(DINNER / DI - 1);
  assign rlast     = (phase == PH_INPROJ) ? RW'(ROWS_IN / DO - 1) : RW'(D_MODEL_P / DO - 1);
  assign row_last  = (kstep == klast);
  assign grp_last  = (((32'(kstep) + 1) * DI) % GROUP) == 0;
  // the last tile of a row block waits until the previous results have been handed on
  assign w_ready   = mmu_phase && !all_issued && !(row_last && (ser_cnt != 0 || m_pending != 0));
  assign m_issue   = w_valid && w_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    all_issued <= 1'b0;
    else if (!mmu_phase)                           all_issued <= 1'b0;
    else if (m_issue && row_last && rblk == rlast) all_issued <= 1'b1;
  end

  always_comb
    for (int i = 0; i < DI; i++) m_act[i] = a4[AW'(32'(kstep) * DI + i)];

  mmu #(.D_IN(DI), .D_OUT(DO)) u_mmu (
    .clk, .rst_n, .in_valid(m_issue), .act(m_act), .wgt(w_data), .w_scale(w_scale),
    .a_shift(ashift[(32'(kstep) * DI) / GROUP]), .grp_last(grp_last), .row_last(row_last),
    .out_valid(m_v), .out(m_out));

  // ---------------------------------------------------------------- SSMU
  logic  s_out_v;
  int8_t s_out [PP];
  logic  s_idle;
  ssmu #(.NH(NH), .HD(HD), .DS(DS), .PP(PP), .NP(NP)) u_ssmu (
    .clk, .rst_n,
    .cfg_we(ssm_cfg_we), .cfg_sel(ssm_cfg_sel), .cfg_addr(ssm_cfg_addr), .cfg_data(ssm_cfg_data),
    .conv_we, .conv_ch, .conv_w, .conv_b, .sh,
    .in_valid(ser_cnt != 0 && phase == PH_INPROJ), .in_ready(s_in_ready), .in_data(ser[0]),
    .h_in_valid, .h_in_ready, .h_in, .h_out_valid, .h_out,
    .out_valid(s_out_v), .out_data(s_out), .idle(s_idle));

  // PP-wide SSMU output to the element-serial RMSNorm
  int8_t yq [PP];
  logic [$clog2(PP+1)-1:0] yq_cnt;
  logic r2_in_ready, r2_v, r2_last, r2_ready;
  logic signed [15:0] r2_d;

  rmsnorm #(.N(DINNER), .IW(32), .OW(16), .FRAC(10), .USE_GAIN(1'b1), .GFRAC(12)) u_rms2 (
    .clk, .rst_n, .g_we, .g_addr, .g_data,
    .in_valid(yq_cnt != 0), .in_ready(r2_in_ready), .in_data(32'(yq[0])),
    .out_valid(r2_v), .out_ready(r2_ready), .out_data(r2_d), .out_last(r2_last));

  // ---------------------------------------------------------------- HTU
  logic t_in_ready, t_v;
  logic [$clog2(SEG_LEN)-1:0] t_col;
  logic signed [HW-1:0] t_out [SEGS];
  assign r2_ready = t_in_ready;
  htu #(.SEGS(SEGS), .SEG_LEN(SEG_LEN), .IW(16)) u_htu (
    .clk, .rst_n, .in_valid(r2_v), .in_ready(t_in_ready), .in_data(r2_d),
    .out_valid(t_v), .out_col(t_col), .out_data(t_out));

  logic [$clog2(SEG_LEN+1)-1:0] t_cnt;
  always_ff @(posedge clk) begin
    if (t_v) for (int k = 0; k < SEGS; k++) obuf[AW'(k * SEG_LEN) + AW'(t_col)] <= t_out[k];
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      x_cnt     <= '0;
      q_cnt     <= '0;
      q2_rd     <= '0;
      kstep     <= '0;
      rblk      <= '0;
      m_pending <= '0;
      ser_cnt   <= '0;
      yq_cnt    <= '0;
      t_cnt     <= '0;
      done      <= 1'b0;
      y_valid   <= 1'b0;
      for (int o = 0; o < DO; o++) begin ser[o] <= '0; y_data[o] <= '0; end
      for (int i = 0; i < PP; i++) yq[i] <= '0;
    end else begin
      done    <= 1'b0;
      y_valid <= 1'b0;
      if (x_valid && x_ready) x_cnt <= x_cnt + 1'b1;
      if (q_v) q_cnt <= (q_last && q_cnt == AW'(phase == PH_NORM1 ? D_MODEL_P - 1 : DINNER - 1)) ? '0 : q_cnt + 1'b1;
      if (q_in_valid && q_in_ready && phase == PH_QUANT2) q2_rd <= q2_rd + 1'b1;

      // MMU step counters
      if (m_issue) begin
        kstep <= row_last ? '0 : kstep + 1'b1;
        if (row_last) rblk <= (rblk == rlast) ? '0 : rblk + 1'b1;
      end
      m_pending <= m_pending + 2'(m_issue && row_last) - 2'(m_v);

      // in-projection results to the SSMU, one element per cycle
      if (m_v && phase == PH_INPROJ) begin
        ser     <= m_out;
        ser_cnt <= ($clog2(DO+1))'(DO);
      end else if (ser_cnt != 0 && s_in_ready && phase == PH_INPROJ) begin
        for (int o = 0; o < DO - 1; o++) ser[o] <= ser[o+1];
        ser_cnt <= ser_cnt - 1'b1;
      end

      // out-projection results plus residual
      if (m_v && phase == PH_OUTPROJ) begin
        y_valid <= 1'b1;
        for (int o = 0; o < DO; o++) begin
          logic signed [33:0] s;
          s = 34'(resid[$clog2(D_MODEL_P)'(32'(rblk_prev) * DO + o)]) + 34'(m_out[o] >>> op_shift);
          y_data[o] <= (s > 34'sh7fffffff) ? 32'sh7fffffff : (s < -34'sh80000000) ? 32'sh80000000 : 32'(s);
        end
        if (all_issued && m_pending == 2'd1) begin
          done  <= 1'b1;
          phase <= PH_IDLE;
        end
      end

      // SSMU output queue: a beat of PP elements is loaded, then one element per cycle leaves
      if (s_out_v) begin
        for (int i = 0; i < PP; i++) yq[i] <= s_out[i];
        yq_cnt <= ($clog2(PP+1))'(PP);
      end else if (yq_cnt != 0 && r2_in_ready) begin
        for (int i = 0; i < PP - 1; i++) yq[i] <= yq[i+1];
        yq_cnt <= yq_cnt - 1'b1;
      end

      if (t_v) t_cnt <= t_cnt + 1'b1;

      case (phase)
        PH_IDLE: if (start) begin
          phase <= PH_NORM1;
          x_cnt <= '0;
          q_cnt <= '0;
        end
        PH_NORM1: if (q_v && q_last && q_cnt == AW'(D_MODEL_P - 1)) begin
          phase <= PH_INPROJ;
          kstep <= '0;
          rblk  <= '0;
        end
        PH_INPROJ: if (all_issued && m_pending == 0 && ser_cnt == 0) phase <= PH_ROT;
        PH_ROT: if (t_cnt == ($clog2(SEG_LEN+1))'(SEG_LEN) && s_idle) begin
          phase <= PH_QUANT2;
          t_cnt <= '0;
          q2_rd <= '0;
          q_cnt <= '0;
        end
        PH_QUANT2: if (q_v && q_last && q_cnt == AW'(DINNER - 1)) begin
          phase <= PH_OUTPROJ;
          kstep <= '0;
          rblk  <= '0;
        end
        PH_OUTPROJ: ;
        default: ;
      endcase
    end
  end

  assign busy = (phase != PH_IDLE);

  // the SSMU emits a PP-wide beat at most every D_STATE/NP cycles; the queue is empty by then
  always_ff @(posedge clk) begin
    if (rst_n && s_out_v)
      assert (yq_cnt == 0 || (yq_cnt == 1 && r2_in_ready))
        else $error("lightmamba_top: SSMU output queue overrun");
  end
endmodule
