// tb_lightmamba_top: end-to-end decode tokens through lightmamba_top (reduced size: 4 heads of 160, d_model 256, state 16).
// What: 2 token(s) of one Mamba2 block. The bench plays host and DMA: it streams the
// residual, the W4A4 weights (from a fixed hash, per-row scales) and the SSM hidden state (with
// random gaps, so the SSM unit stalls), and collects y and h_out.
// Checks: every MMU result of both projections against a reference built from the unit's own
// quantised activations; the order in which those results enter the SSM unit and in which the
// SSM outputs enter RMSNorm-2; every rotated element against H40 (x) H (Sylvester) applied here
// to the HTU's input; every y beat equals residual + (out-projection >>> op_shift); the
// Hadamard rotation keeps energy (sum of squares of the HTU output = D_INNER * sum of squares of
// its input); the y, h_out and SSM-output counts; one done per token; the token's cycle
// count against the MMU-bound lower limit (one weight tile per cycle).
// Mechanism counters (each must fire at least once): weight-stream stall on a row block's last
// tile, SSMU back-pressure on the serialiser, RMSNorm-1 back-pressure from the quantiser,
// both SSM head buffers full, SSM state gaps, phase changes through all five phases.
`timescale 1ns/1ps
module tb_lightmamba_top;
  import lm_pkg::*;
  localparam int D_MODEL_P = 256, NH = 4, HD = 160, DS = 16, SEGS = 40, SEG_LEN = 16;
  localparam int DINNER = NH * HD, ROWS_IN = NH + 2 * DS + 2 * DINNER;
  localparam int NTOK = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic start, busy, done, ssm_cfg_we, conv_we, g_we, x_valid, x_ready, w_valid, w_ready;
  logic h_in_valid, h_in_ready, h_out_valid, y_valid;
  ssm_shifts_t sh;
  logic [4:0] op_shift;
  ssm_cfg_e ssm_cfg_sel;
  logic [$clog2(NH)-1:0] ssm_cfg_addr;
  int8_t ssm_cfg_data;
  logic [$clog2(DINNER+2*DS)-1:0] conv_ch;
  int8_t conv_w [D_CONV];
  logic signed [15:0] conv_b;
  logic [$clog2(DINNER)-1:0] g_addr;
  logic signed [15:0] g_data;
  int32_t x_data;
  int4_t w_data [MMU_DOUT][MMU_DIN];
  logic [7:0] w_scale [MMU_DOUT];
  int8_t h_in [SSM_PP*SSM_NP], h_out [SSM_PP*SSM_NP];
  int32_t y_data [MMU_DOUT];

  lightmamba_top #(.D_MODEL_P(D_MODEL_P), .NH(NH), .HD(HD), .DS(DS), .SEGS(SEGS), .SEG_LEN(SEG_LEN)) dut (.*);

  localparam int DO = MMU_DOUT, DI = MMU_DIN;

  function automatic int wgt(int proj, int r, int c);
    int unsigned v;
    v = (r * 40503 + c * 9973 + proj * 7919 + 12345) * 32'd2654435761;
    return int'((v >> 13) % 16) - 8;
  endfunction
  function automatic int wsc(int proj, int r); return (r * 7 + proj * 3) % 9 + 1; endfunction

  // reference MMU row result, from the activations held in the unit
  function automatic int ref_row(int proj, int r);
    longint acc, gs;
    int cols;
    cols = (proj == 0) ? D_MODEL_P : DINNER;
    acc = 0;
    for (int g = 0; g < cols / GROUP; g++) begin
      gs = 0;
      for (int c = g * GROUP; c < (g + 1) * GROUP; c++) gs += longint'(dut.a4[c]) * wgt(proj, r, c);
      acc += (gs * wsc(proj, r)) <<< dut.ashift[g];
    end
    return (acc > 64'sd2147483647) ? 32'sh7fffffff : (acc < -64'sd2147483648) ? 32'sh80000000 : int'(acc);
  endfunction

  int resid [D_MODEL_P];
  int mrow, yrow, hcnt, scnt, rcnt, ycnt, dones;
  int c_wstall, c_sstall, c_r1stall, c_r2stall, c_hgap, c_phase;
  longint e_in, e_out;
  logic [2:0] last_phase;
  int ser_q [$], yq_q [$];             // expected SSMU input and RMSNorm-2 input streams
  longint rvec [DINNER], tvec [DINNER];
  int rpos, h40 [SEGS][SEGS];
  bit rot_checked;

  function automatic int legendre(int a);
    int r;
    a = ((a % 19) + 19) % 19;
    if (a == 0) return 0;
    r = 1;
    for (int e = 0; e < 9; e++) r = (r * a) % 19;
    return (r == 1) ? 1 : -1;
  endfunction

  // HTU reference: out[k*SEG_LEN + j] = sum_k' H40[k][k'] sum_j' H[j][j'] in[k'*SEG_LEN + j']
  task automatic check_rotation();
    longint e;
    int bad;
    bad = 0;
    for (int k = 0; k < SEGS; k++)
      for (int j = 0; j < SEG_LEN; j++) begin
        tvec[k*SEG_LEN+j] = 0;
        for (int jj = 0; jj < SEG_LEN; jj++)
          tvec[k*SEG_LEN+j] += ($countones(j & jj) % 2) ? -rvec[k*SEG_LEN+jj] : rvec[k*SEG_LEN+jj];
      end
    for (int k = 0; k < SEGS; k++)
      for (int j = 0; j < SEG_LEN; j++) begin
        e = 0;
        for (int kk = 0; kk < SEGS; kk++) e += h40[k][kk] * tvec[kk*SEG_LEN+j];
        checks++;
        if (longint'(dut.obuf[k*SEG_LEN+j]) != e) begin
          failures++; bad++;
          if (bad < 4) $display("rotated %0d got %0d exp %0d", k*SEG_LEN+j, dut.obuf[k*SEG_LEN+j], e);
        end
      end
  endtask

  always @(posedge clk) if (rst_n) begin
    // the serialiser must hand the in-projection results to the SSMU in row order
    if (dut.m_v && dut.phase == 3'd2) for (int o = 0; o < DO; o++) ser_q.push_back(dut.m_out[o]);
    if (dut.ser_cnt != 0 && dut.s_in_ready && dut.phase == 3'd2) begin
      checks++;
      if (ser_q.size() == 0 || dut.ser[0] != ser_q[0]) begin
        failures++; $display("SSMU input out of order");
      end
      if (ser_q.size() != 0) void'(ser_q.pop_front());
    end
    // and the SSMU outputs must reach RMSNorm-2 in channel order
    if (dut.s_out_v) for (int p = 0; p < SSM_PP; p++) yq_q.push_back(int'(dut.s_out[p]));
    if (dut.yq_cnt != 0 && dut.r2_in_ready) begin
      checks++;
      if (yq_q.size() == 0 || int'(dut.yq[0]) != yq_q[0]) begin
        failures++; $display("RMSNorm-2 input out of order");
      end
      if (yq_q.size() != 0) void'(yq_q.pop_front());
    end
    if (dut.m_v) begin
      int proj, e;
      proj = (dut.phase == 3'd5) ? 1 : 0;
      for (int o = 0; o < DO; o++) begin
        e = ref_row(proj, mrow * DO + o);
        checks++;
        if (dut.m_out[o] != e) begin
          failures++;
          if (failures < 8) $display("proj %0d row %0d got %0d exp %0d", proj, mrow * DO + o, dut.m_out[o], e);
        end
      end
      mrow++;
    end
    if (y_valid) begin
      for (int o = 0; o < DO; o++) begin
        longint s;
        s = longint'(resid[yrow * DO + o]) + longint'(ref_row(1, yrow * DO + o) >>> op_shift);
        s = (s > 64'sd2147483647) ? 64'sd2147483647 : (s < -64'sd2147483648) ? -64'sd2147483648 : s;
        checks++;
        if (longint'(y_data[o]) != s) begin
          failures++;
          if (failures < 8) $display("y %0d got %0d exp %0d", yrow * DO + o, y_data[o], s);
        end
      end
      yrow++; ycnt++;
    end
    if (h_out_valid) hcnt++;
    if (dut.s_out_v) scnt++;
    if (dut.r2_v && dut.t_in_ready) begin
      rcnt++; e_in += longint'(dut.r2_d) * dut.r2_d;
      if (rpos < DINNER) rvec[rpos] = longint'(dut.r2_d);
      rpos++;
    end
    if (done) dones++;
    if (w_valid && !w_ready && (dut.phase == 3'd2 || dut.phase == 3'd5)) c_wstall++;
    if (dut.ser_cnt != 0 && !dut.s_in_ready && dut.phase == 3'd2) c_sstall++;
    if (dut.r1_v && !dut.q_in_ready) c_r1stall++;
    if (dut.u_ssmu.full[0] && dut.u_ssmu.full[1]) c_r2stall++;
    if (h_in_ready && !h_in_valid) c_hgap++;
    if (dut.phase != last_phase) c_phase++;
    last_phase <= dut.phase;
    if (dut.phase == 3'd3 && dut.t_cnt == SEG_LEN && !rot_checked) begin
      rot_checked = 1;
      check_rotation();
      e_out = 0;
      for (int i = 0; i < DINNER; i++) e_out += longint'(dut.obuf[i]) * dut.obuf[i];
      checks++;
      if (e_out != longint'(DINNER) * e_in) begin
        failures++; $display("HTU energy %0d, expected %0d x %0d", e_out, DINNER, e_in);
      end
    end
  end

  initial begin
    #(64'd200000000); failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t0, cyc, minc;
    start = 0; ssm_cfg_we = 0; conv_we = 0; g_we = 0; x_valid = 0; w_valid = 0; h_in_valid = 0;
    ssm_cfg_sel = CFG_DT_BIAS; ssm_cfg_addr = 0; ssm_cfg_data = 0; conv_ch = 0; conv_b = 0;
    g_addr = 0; g_data = 0; x_data = 0; op_shift = 5'd6; last_phase = 0;
    e_in = 0; e_out = 0;
    foreach (conv_w[k]) conv_w[k] = 0;
    foreach (w_data[o, i]) w_data[o][i] = 0;
    foreach (w_scale[o]) w_scale[o] = 0;
    foreach (h_in[i]) h_in[i] = 0;
    sh = '{in_dt: 5'd12, in_xbc: 5'd12, in_z: 5'd12, conv: 5'd6, dt_a: 5'd4, dt_b: 5'd4, bx: 5'd4,
           ah: 5'd7, hc: 5'd5, y: 5'd3, xd: 5'd4, yz: 5'd4};
    for (int i = 0; i < 20; i++)
      for (int j = 0; j < 20; j++) begin
        int v;
        if (i == 0) v = 1; else if (j == 0) v = -1; else v = legendre(j - i) + (i == j ? 1 : 0);
        h40[i][j] = v; h40[i][j+20] = v; h40[i+20][j] = v; h40[i+20][j+20] = -v;
      end
    rpos = 0; rot_checked = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // configuration: SSM per-head constants, conv1d taps, RMSNorm-2 gain
    for (int h = 0; h < NH; h++) begin
      @(negedge clk); ssm_cfg_we = 1; ssm_cfg_addr = ($clog2(NH))'(h);
      ssm_cfg_sel = CFG_DT_BIAS; ssm_cfg_data = 8'(int'($urandom_range(40)) - 20);
      @(negedge clk); ssm_cfg_sel = CFG_A; ssm_cfg_data = 8'(-int'($urandom_range(60)) - 4);
      @(negedge clk); ssm_cfg_sel = CFG_D; ssm_cfg_data = 8'(int'($urandom_range(100)) - 50);
    end
    @(negedge clk); ssm_cfg_we = 0;
    for (int c = 0; c < DINNER + 2 * DS; c++) begin
      @(negedge clk); conv_we = 1; conv_ch = ($clog2(DINNER+2*DS))'(c);
      foreach (conv_w[k]) conv_w[k] = 8'(int'($urandom_range(120)) - 60);
      conv_b = 16'(int'($urandom_range(400)) - 200);
    end
    @(negedge clk); conv_we = 0;
    for (int i = 0; i < DINNER; i++) begin
      @(negedge clk); g_we = 1; g_addr = ($clog2(DINNER))'(i); g_data = 16'(3000 + int'($urandom_range(2000)));
    end
    @(negedge clk); g_we = 0;
    // wait for the conv1d state clear walk
    repeat (DINNER + 2 * DS + 8) @(posedge clk);

    for (int t = 0; t < NTOK; t++) begin
      mrow = 0; yrow = 0; e_in = 0; rpos = 0; rot_checked = 0;
      foreach (resid[i]) resid[i] = int'($urandom_range(200000)) - 100000;
      @(negedge clk); start = 1; t0 = $time / 10;
      @(negedge clk); start = 0;
      fork
        begin : x_drv
          foreach (resid[i]) begin
            @(negedge clk); x_valid = 1; x_data = resid[i];
            @(posedge clk); while (!x_ready) @(posedge clk);
            #1 x_valid = 0;
          end
        end
        begin : w_drv
          for (int proj = 0; proj < 2; proj++) begin
            int rows, cols;
            rows = (proj == 0) ? ROWS_IN : D_MODEL_P;
            cols = (proj == 0) ? D_MODEL_P : DINNER;
            if (proj == 1) mrow = 0;
            for (int rb = 0; rb < rows / DO; rb++)
              for (int k = 0; k < cols / DI; k++) begin
                @(negedge clk);
                if ($urandom_range(15) == 0) begin w_valid = 0; @(negedge clk); end
                w_valid = 1;
                for (int o = 0; o < DO; o++) begin
                  w_scale[o] = 8'(wsc(proj, rb * DO + o));
                  for (int i = 0; i < DI; i++) w_data[o][i] = 4'(wgt(proj, rb * DO + o, k * DI + i));
                end
                @(posedge clk); while (!w_ready) @(posedge clk);
                #1 w_valid = 0;
              end
            if (proj == 0) wait (dut.phase == 3'd5);
          end
        end
        begin : h_drv
          for (int i = 0; i < NH * HD / SSM_PP * DS / SSM_NP; i++) begin
            @(negedge clk);
            while ($urandom_range(3) == 0) begin h_in_valid = 0; @(negedge clk); end
            // one long pause a third of the way in: both head banks fill and the MMU must wait
            if (i == NH * HD / SSM_PP * DS / SSM_NP / 3) begin
              h_in_valid = 0;
              repeat (2 * (D_MODEL_P / DI) * (2 * HD + 8)) @(negedge clk);
            end
            h_in_valid = 1;
            foreach (h_in[j]) h_in[j] = 8'(int'($urandom_range(255)) - 128);
            @(posedge clk); while (!h_in_ready) @(posedge clk);
            #1 h_in_valid = 0;
          end
        end
      join
      wait (!busy);
      cyc = $time / 10 - t0;
      minc = longint'(ROWS_IN / DO) * (D_MODEL_P / DI) + longint'(D_MODEL_P / DO) * (DINNER / DI);
      $display("token %0d: %0d cycles (MMU-bound minimum %0d)", t, cyc, minc);
      checks++;
      if (cyc < minc || cyc > 4 * minc) begin failures++; $display("token cycle count out of range"); end
      repeat (10) @(posedge clk);
    end
    checks += 5;
    if (dones != NTOK) begin failures++; $display("dones %0d", dones); end
    if (ycnt != NTOK * D_MODEL_P / DO) begin failures++; $display("y beats %0d", ycnt); end
    if (hcnt != NTOK * NH * HD / SSM_PP * DS / SSM_NP) begin failures++; $display("h_out beats %0d", hcnt); end
    if (scnt != NTOK * DINNER / SSM_PP) begin failures++; $display("ssm beats %0d", scnt); end
    if (rcnt != NTOK * DINNER) begin failures++; $display("rms2 elements %0d", rcnt); end
    $display("mechanisms: wstall %0d sstall %0d r1stall %0d banks-full %0d hgap %0d phase %0d",
             c_wstall, c_sstall, c_r1stall, c_r2stall, c_hgap, c_phase);
    checks += 6;
    if (c_wstall == 0)  begin failures++; $display("mechanism never seen: weight stall"); end
    if (c_sstall == 0)  begin failures++; $display("mechanism never seen: SSMU back-pressure"); end
    if (c_r1stall == 0) begin failures++; $display("mechanism never seen: RMSNorm-1 back-pressure"); end
    if (c_r2stall == 0) begin failures++; $display("mechanism never seen: both SSM head banks full"); end
    if (c_hgap == 0)    begin failures++; $display("mechanism never seen: h_in gap"); end
    if (c_phase < 6 * NTOK) begin failures++; $display("mechanism never seen: all phases"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
