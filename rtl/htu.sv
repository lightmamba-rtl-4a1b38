// htu: Hadamard transform unit, the online rotation in front of the output projection.
// A vector of SEGS x SEG_LEN elements (40 x 128 = 5120 for d_inner) is rotated by
// H = H40 (x) H128. Elements stream in one per cycle in natural order; the 128-point FHT
// (ht128) transforms each 128-element segment k, and its output element j is written to
// bank k, address j of a SEGS-bank buffer. When all segments are in, address j is read from
// all banks at once, giving the 40 elements {k*128 + j}, which the 40-point tiny matrix unit
// (ht40) transforms. The output is SEG_LEN beats of 40 elements; beat j, element k is result
// element k*128 + j. The two HT variants and their sizes are the paper's; joining them by a
// banked transpose buffer is this design's choice.
// Timing: in_ready is high while the unit collects a vector (SEGS*SEG_LEN input cycles plus
// the FHT drain of SEG_LEN-1 cycles), then SEG_LEN output beats follow, one per cycle, starting
// 2 cycles after the last FHT output. No back-pressure on the output.
module htu #(
  parameter int SEGS    = 40,
  parameter int SEG_LEN = 128,
  parameter int IW      = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [IW-1:0]  in_data,
  output logic                  out_valid,
  output logic [$clog2(SEG_LEN)-1:0] out_col,
  output logic signed [IW+$clog2(SEG_LEN)+$clog2(SEGS)-1:0] out_data [SEGS]
);
  localparam int W1 = IW + $clog2(SEG_LEN);
  localparam int JW = $clog2(SEG_LEN);
  localparam int KW = $clog2(SEGS);
  localparam int TOTAL = SEGS * SEG_LEN;

  typedef enum logic [1:0] {COLLECT, TRANSPOSE, DRAIN} state_e;
  state_e state;

  logic [$clog2(TOTAL+1)-1:0] accepted;
  logic              f_valid;
  logic signed [W1-1:0] f_data;
  ht128 #(.N(SEG_LEN), .IW(IW)) u_ht128 (
    .clk, .rst_n, .in_valid(in_valid && in_ready), .in_data,
    .out_valid(f_valid), .out_data(f_data)
  );

  logic signed [W1-1:0] bank [SEGS][SEG_LEN];
  logic [JW-1:0] wj, rj;
  logic [KW-1:0] wk;

  logic              t_valid;
  logic [JW-1:0]     t_col;
  logic signed [W1-1:0] t_vec [SEGS];
  logic              h_valid;
  logic [JW-1:0]     h_col;

  always_ff @(posedge clk) begin
    if (f_valid) bank[wk][wj] <= f_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= COLLECT;
      wj      <= '0;
      wk      <= '0;
      rj      <= '0;
      t_valid <= 1'b0;
      t_col   <= '0;
      h_col   <= '0;
      for (int k = 0; k < SEGS; k++) t_vec[k] <= '0;
    end else begin
      t_valid <= 1'b0;
      if (f_valid) begin
        wj <= (wj == JW'(SEG_LEN - 1)) ? '0 : wj + 1'b1;
        if (wj == JW'(SEG_LEN - 1)) begin
          wk <= (wk == KW'(SEGS - 1)) ? '0 : wk + 1'b1;
          if (wk == KW'(SEGS - 1)) begin
            state <= TRANSPOSE;
            rj    <= '0;
          end
        end
      end
      if (state == TRANSPOSE) begin
        t_valid <= 1'b1;
        t_col   <= rj;
        for (int k = 0; k < SEGS; k++) t_vec[k] <= bank[k][rj];
        rj <= rj + 1'b1;
        if (rj == JW'(SEG_LEN - 1)) state <= DRAIN;
      end
      if (state == DRAIN && !t_valid) state <= COLLECT;
      h_col <= t_col;
    end
  end

  // the collect phase accepts exactly one vector before the transpose
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) accepted <= '0;
    else if (state != COLLECT) accepted <= '0;
    else if (in_valid && in_ready) accepted <= accepted + 1'b1;
  end
  assign in_ready = (state == COLLECT) && (accepted != ($clog2(TOTAL+1))'(TOTAL));

  ht40 #(.N(SEGS), .IW(W1)) u_ht40 (
    .clk, .rst_n, .in_valid(t_valid), .in_data(t_vec),
    .out_valid(h_valid), .out_data
  );

  assign out_valid = h_valid;
  assign out_col   = h_col;
endmodule
