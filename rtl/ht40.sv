// ht40: 40-point Hadamard transform as a tiny matrix unit.
// The 40 x 40 matrix holds only +1 and -1, so it is stored as one bit per entry (1 = -1) and each
// output is a 40-term sum of added or subtracted inputs. The paper builds this transform as a
// small MMU with one operand fixed to the matrix; which Hadamard matrix of order 40 is used is
// not given. This design uses H40 = [[H20, H20], [H20, -H20]], H20 being the Paley type-I matrix
// of q = 19, generated by a constant function (rows are mutually orthogonal, H40 * H40^T = 40 I).
// Timing: one 40-vector per cycle, result registered one cycle later. Unnormalised.
module ht40 #(
  parameter int N  = 40,
  parameter int IW = 23
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [IW-1:0]          in_data  [N],
  output logic                          out_valid,
  output logic signed [IW+$clog2(N)-1:0] out_data [N]
);
  localparam int OW = IW + $clog2(N);
  localparam int Q  = N / 2 - 1;   // Paley prime (19 for N = 40)

  typedef logic [N*N-1:0] hmat_t;   // entry (i, j) at bit i*N + j

  // quadratic character of a modulo Q
  function automatic int chi(input int a);
    int r, c;
    r = ((a % Q) + Q) % Q;
    c = -1;
    for (int k = 1; k < Q; k++) if ((k * k) % Q == r) c = 1;
    if (r == 0) c = 0;
    return c;
  endfunction

  // sign bit (1 = -1) of the Paley type-I matrix of order Q+1
  function automatic logic h20_neg(input int i, input int j);
    int v;
    if (i == 0)      v = 1;
    else if (j == 0) v = -1;
    else             v = chi(j - i) + ((i == j) ? 1 : 0);
    return logic'(v < 0);
  endfunction

  function automatic hmat_t build_h();
    hmat_t h;
    h = '0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        h[i*N+j] = h20_neg(i % (N / 2), j % (N / 2)) ^ ((i >= N / 2) && (j >= N / 2));
    return h;
  endfunction

  localparam hmat_t H = build_h();

  logic signed [OW-1:0] sum [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      sum[i] = '0;
      for (int j = 0; j < N; j++)
        sum[i] = H[i*N+j] ? sum[i] - OW'(in_data[j]) : sum[i] + OW'(in_data[j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) out_data[i] <= '0;
    end else begin
      out_valid <= in_valid;
      for (int i = 0; i < N; i++) out_data[i] <= sum[i];
    end
  end
endmodule
