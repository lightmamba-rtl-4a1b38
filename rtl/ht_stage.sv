// ht_stage: one butterfly stage of the streaming fast Hadamard transform.
// Elements arrive one at a time (in_valid may have gaps). The first D elements of each block of
// 2D are pushed into the input FIFO. Each of the next D elements is paired with the oldest
// element of the input FIFO by the butterfly core: the sum a+b leaves at once, the difference
// a-b is pushed into the output FIFO. While the following block fills the input FIFO, the
// output FIFO drains one difference per cycle. The output stream is therefore the block's D
// sums followed by its D differences, the order the next stage (D/2) expects. This follows the
// stage structure of the paper's 128-point unit (a core and two FIFOs per stage); registered
// output, no back-pressure.
module ht_stage #(
  parameter int D = 64,
  parameter int W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  output logic signed [W:0]   out_data
);
  localparam int CW = $clog2(2 * D) + 1;
  localparam int XW = (D > 1) ? $clog2(D) : 1;

  logic signed [W-1:0] in_fifo  [D];
  logic signed [W:0]   out_fifo [D];
  logic [CW-1:0]       cnt;       // position within the 2D block
  logic [CW-1:0]       rd;        // output FIFO read pointer
  logic [CW-1:0]       pending;   // differences waiting in the output FIFO

  logic              second_half;
  logic [CW-1:0]     pair_idx;
  logic signed [W:0] a_ext, b_ext;

  always_comb begin
    second_half = (cnt >= CW'(D));
    pair_idx    = cnt - CW'(D);
    a_ext       = (W+1)'(in_fifo[XW'(second_half ? pair_idx : '0)]);
    b_ext       = (W+1)'(in_data);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      rd        <= '0;
      pending   <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        cnt <= (cnt == CW'(2 * D - 1)) ? '0 : cnt + 1'b1;
        if (!second_half) begin
          in_fifo[XW'(cnt)] <= in_data;
        end else begin
          out_fifo[XW'(pair_idx)] <= a_ext - b_ext;
          out_valid          <= 1'b1;
          out_data           <= a_ext + b_ext;
        end
      end
      // drain differences while the next block fills the input FIFO
      if (!second_half && pending != 0) begin
        out_valid <= 1'b1;
        out_data  <= out_fifo[XW'(rd)];
        rd        <= (rd == CW'(D - 1)) ? '0 : rd + 1'b1;
      end
      // push and drain never coincide: one happens in each half of the block
      if (in_valid && second_half)       pending <= pending + 1'b1;
      else if (!second_half && pending != 0) pending <= pending - 1'b1;
    end
  end
endmodule
