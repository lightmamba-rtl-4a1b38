// tb_ssmu: two decode tokens through a small SSM unit (4 heads of 4, state 16, tiles 2 x 8).
// A reference model written here computes, with the same power-of-two quantisation rules,
// delta, A-bar, the conv1d + SiLU outputs, every h_t tile and every gated output; the unit's
// h_out and out streams are compared element by element. h_in is offered with random gaps so
// the input stalls on a full head buffer; the stall is counted and must occur.
// Timing: in_data is offered one element per cycle; h_out and out have no back-pressure.
// The SSM formulas, the head-by-head input order and the tiling follow the source design; the
// 2 x 8 tile, the formats and the shifts are this design's choice.
`timescale 1ns/1ps
module tb_ssmu;
  import lm_pkg::*;
  localparam int NH = 4, HD = 4, DS = 16, PP = 2, NP = 8, K = 4;
  localparam int CH = NH * HD + 2 * DS, NTOK = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic cfg_we, conv_we, in_valid, in_ready, h_in_valid, h_in_ready, h_out_valid, out_valid, idle;
  ssm_cfg_e cfg_sel;
  logic [1:0] cfg_addr;
  int8_t cfg_data;
  logic [5:0] conv_ch;
  int8_t conv_w [K];
  logic signed [15:0] conv_b;
  ssm_shifts_t sh;
  int32_t in_data;
  int8_t h_in [PP*NP], h_out [PP*NP], out_data [PP];

  ssmu #(.NH(NH), .HD(HD), .DS(DS), .PP(PP), .NP(NP), .K(K)) dut (.*);

  // ---------------- reference model
  int bias [NH], amem [NH], dmem [NH];
  int cw [CH][K], cb [CH], hist [CH][K-1];
  int hs [NH][HD][DS];
  int raw [$];                       // input stream of the current token
  int exp_h [$], exp_o [$];          // expected h_out elements and outputs

  function automatic int rq(longint v, int s);
    real r;
    r = $floor(real'(v) / real'(longint'(1) << s) + 0.5);
    return (r > 127.0) ? 127 : (r < -128.0) ? -128 : int'(r);
  endfunction
  function automatic int sat(int v); return (v > 127) ? 127 : (v < -128) ? -128 : v; endfunction
  function automatic int lut(int f, int x8, int inf, int outf);
    real x, y, q;
    x = real'(x8) / real'(1 << inf);
    y = (f == 0) ? ((x > 20.0) ? x : $ln(1.0 + $exp(x))) : (f == 1) ? $exp(x) : x / (1.0 + $exp(-x));
    q = y * real'(1 << outf);
    q = (q >= 0.0) ? $floor(q + 0.5) : -$floor(-q + 0.5);
    return (q > 127.0) ? 127 : (q < -128.0) ? -128 : int'(q);
  endfunction
  function automatic int conv(int c, int u);
    longint acc;
    acc = cb[c] + cw[c][K-1] * u;
    for (int k = 0; k < K - 1; k++) acc += cw[c][k] * hist[c][k];
    for (int k = 0; k < K - 2; k++) hist[c][k] = hist[c][k+1];
    hist[c][K-2] = u;
    return rq(acc, sh.conv);
  endfunction

  task automatic make_token();
    int dtr [NH], br [DS], cr [DS], xr [NH][HD], zr [NH][HD];
    int delta [NH], abar [NH], bv [DS], cv [DS], xv [NH][HD], zv [NH][HD];
    raw.delete(); exp_h.delete(); exp_o.delete();
    foreach (dtr[h]) begin dtr[h] = int'($urandom_range(4000)) - 2000; raw.push_back(dtr[h]); end
    foreach (br[n])  begin br[n]  = int'($urandom_range(4000)) - 2000; raw.push_back(br[n]); end
    foreach (cr[n])  begin cr[n]  = int'($urandom_range(4000)) - 2000; raw.push_back(cr[n]); end
    for (int h = 0; h < NH; h++) begin
      for (int p = 0; p < HD; p++) begin xr[h][p] = int'($urandom_range(4000)) - 2000; raw.push_back(xr[h][p]); end
      for (int p = 0; p < HD; p++) begin zr[h][p] = int'($urandom_range(4000)) - 2000; raw.push_back(zr[h][p]); end
    end
    for (int h = 0; h < NH; h++) begin
      delta[h] = lut(0, sat(rq(dtr[h], sh.in_dt) + bias[h]), 4, 4);
      abar[h]  = lut(1, rq(delta[h] * amem[h], sh.dt_a), 4, 7);
    end
    for (int n = 0; n < DS; n++) bv[n] = lut(2, conv(NH * HD + n, rq(br[n], sh.in_xbc)), 4, 4);
    for (int n = 0; n < DS; n++) cv[n] = lut(2, conv(NH * HD + DS + n, rq(cr[n], sh.in_xbc)), 4, 4);
    for (int h = 0; h < NH; h++)
      for (int p = 0; p < HD; p++) begin
        xv[h][p] = lut(2, conv(h * HD + p, rq(xr[h][p], sh.in_xbc)), 4, 4);
        zv[h][p] = lut(2, rq(zr[h][p], sh.in_z), 4, 4);
      end
    for (int h = 0; h < NH; h++)
      for (int pt = 0; pt < HD / PP; pt++) begin
        int yacc [PP];
        foreach (yacc[p]) yacc[p] = 0;
        for (int nt = 0; nt < DS / NP; nt++)
          for (int pp = 0; pp < PP; pp++)
            for (int nn = 0; nn < NP; nn++) begin
              int p, n, db, ah, bx, ht;
              p = pt * PP + pp; n = nt * NP + nn;
              db = rq(delta[h] * bv[n], sh.dt_b);
              ah = rq(abar[h] * hs[h][p][n], sh.ah);
              bx = rq(db * xv[h][p], sh.bx);
              ht = sat(ah + bx);
              exp_h.push_back(ht);
              hs[h][p][n] = ht;
              yacc[pp] += rq(ht * cv[n], sh.hc);
            end
        for (int pp = 0; pp < PP; pp++) begin
          int p, yy;
          p = pt * PP + pp;
          yy = sat(rq(yacc[pp], sh.y) + rq(xv[h][p] * dmem[h], sh.xd));
          exp_o.push_back(rq(yy * zv[h][p], sh.yz));
        end
      end
  endtask

  // ---------------- monitors
  int hcnt, ocnt, stalls, hgaps;
  int hprev [NH][HD][DS];
  always @(posedge clk) if (rst_n) begin
    if (h_out_valid)
      for (int i = 0; i < PP*NP; i++) begin
        checks++;
        if (hcnt >= exp_h.size() || int'(h_out[i]) != exp_h[hcnt]) begin
          failures++; if (failures < 6) $display("h %0d got %0d exp %0d", hcnt, h_out[i], exp_h[hcnt]);
        end
        hcnt++;
      end
    if (out_valid)
      for (int p = 0; p < PP; p++) begin
        checks++;
        if (ocnt >= exp_o.size() || int'(out_data[p]) != exp_o[ocnt]) begin
          failures++; if (failures < 6) $display("y %0d got %0d exp %0d", ocnt, out_data[p], exp_o[ocnt]);
        end
        ocnt++;
      end
    if (in_valid && !in_ready) stalls++;
  end

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_we = 0; conv_we = 0; in_valid = 0; h_in_valid = 0; cfg_sel = CFG_DT_BIAS; cfg_addr = 0;
    cfg_data = 0; conv_ch = 0; conv_b = 0; in_data = 0;
    foreach (conv_w[k]) conv_w[k] = 0;
    foreach (h_in[i]) h_in[i] = 0;
    sh = '{in_dt: 5'd6, in_xbc: 5'd5, in_z: 5'd5, conv: 5'd6, dt_a: 5'd4, dt_b: 5'd4, bx: 5'd4,
           ah: 5'd7, hc: 5'd5, y: 5'd2, xd: 5'd4, yz: 5'd4};
    foreach (hs[h, p, n]) begin hs[h][p][n] = int'($urandom_range(255)) - 128; hprev[h][p][n] = hs[h][p][n]; end
    foreach (hist[c, k]) hist[c][k] = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int h = 0; h < NH; h++) begin
      bias[h] = int'($urandom_range(60)) - 30; amem[h] = -int'($urandom_range(60)) - 4; dmem[h] = int'($urandom_range(100)) - 50;
      @(negedge clk); cfg_we = 1; cfg_addr = 2'(h);
      cfg_sel = CFG_DT_BIAS; cfg_data = 8'(bias[h]);
      @(negedge clk); cfg_sel = CFG_A; cfg_data = 8'(amem[h]);
      @(negedge clk); cfg_sel = CFG_D; cfg_data = 8'(dmem[h]);
    end
    for (int c = 0; c < CH; c++) begin
      @(negedge clk); cfg_we = 0; conv_we = 1; conv_ch = 6'(c);
      for (int k = 0; k < K; k++) begin cw[c][k] = int'($urandom_range(120)) - 60; conv_w[k] = 8'(cw[c][k]); end
      cb[c] = int'($urandom_range(400)) - 200; conv_b = 16'(cb[c]);
    end
    @(negedge clk); conv_we = 0; cfg_we = 0;
    for (int t = 0; t < NTOK; t++) begin
      hprev = hs;
      make_token();
      hcnt = 0; ocnt = 0;
      fork
        begin
          foreach (raw[i]) begin
            @(negedge clk); in_valid = 1; in_data = raw[i];
            @(posedge clk); while (!in_ready) @(posedge clk);
            #1 in_valid = 0;
          end
        end
        begin
          for (int h = 0; h < NH; h++)
            for (int pt = 0; pt < HD / PP; pt++)
              for (int nt = 0; nt < DS / NP; nt++) begin
                @(negedge clk);
                while ($urandom_range(3) != 0) begin h_in_valid = 0; hgaps++; @(negedge clk); end
                h_in_valid = 1;
                for (int pp = 0; pp < PP; pp++)
                  for (int nn = 0; nn < NP; nn++) h_in[pp*NP+nn] = 8'(hprev[h][pt*PP+pp][nt*NP+nn]);
                @(posedge clk); while (!h_in_ready) @(posedge clk);
                #1 h_in_valid = 0;
              end
        end
      join
      repeat (20) @(posedge clk);
      checks += 2;
      if (hcnt != NH * HD * DS) begin failures++; $display("h count %0d", hcnt); end
      if (ocnt != NH * HD) begin failures++; $display("y count %0d", ocnt); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no head-buffer stall seen"); end
    checks++;
    if (!idle) failures++;
    $display("head-buffer stall cycles %0d, h_in gaps %0d", stalls, hgaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
