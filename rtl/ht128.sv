// ht128: streaming 128-point fast Hadamard transform (Sylvester order, unnormalised).
// Seven ht_stage instances in series with delays 64, 32, 16, 8, 4, 2, 1, each a butterfly core
// with an input and an output FIFO, as in the paper's 128-point unit. One element enters per
// cycle; a vector of 128 elements leaves in natural order, the word growing by one bit per
// stage. The 1/sqrt(128) normalisation is left to the following quantiser (this design's
// choice). Vectors may follow back to back; the last differences of a vector leave only when
// the next vector streams in or, for the final vector, during the following 64+32+...+1 cycles
// as the FIFOs drain.
module ht128 #(
  parameter int N  = 128,
  parameter int IW = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IW-1:0]   in_data,
  output logic                   out_valid,
  output logic signed [IW+$clog2(N)-1:0] out_data
);
  localparam int STAGES = $clog2(N);

  logic                     v [STAGES+1];
  logic signed [IW+STAGES-1:0] d [STAGES+1];

  assign v[0] = in_valid;
  assign d[0] = (IW+STAGES)'(in_data);

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    logic signed [IW+s:0] so;
    ht_stage #(.D(N >> (s + 1)), .W(IW + s)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v[s]),
      .in_data  (d[s][IW+s-1:0]),
      .out_valid(v[s+1]),
      .out_data (so)
    );
    assign d[s+1] = (IW+STAGES)'(so);
  end

  assign out_valid = v[STAGES];
  assign out_data  = d[STAGES];
endmodule
