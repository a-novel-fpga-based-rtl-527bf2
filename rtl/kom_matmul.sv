// kom_matmul: fully parallel N x N matrix multiplier built from kom_mult.
//
// Computes C = A * B for two N x N matrices of unsigned W-bit elements with
// one kom_mult for every product A[i][k]*B[k][j], i.e. N^3 multipliers, as
// the paper counts for this operation ("This operation requires n^3
// multipliers for two matrices of size n x n"); its resource tables use
// N = 3, 5, 7 and 11 with 16- and 32-bit KOM multipliers. The N products of
// each element are summed by a registered adder, so C has 2W + clog2(N) bits
// and no overflow is possible.
//
// Timing: a new pair of matrices can be applied every clock with in_valid;
// the result appears with out_valid LATENCY = log2(W) + 1 clocks later. The
// adder stage and the valid pipeline are this design's choice. The valid
// pipeline is cleared by reset; the data path has no reset.
module kom_matmul
  import cnn_pkg::*;
#(
  parameter int unsigned N  = 3,
  parameter int unsigned W  = 32,
  localparam int unsigned CW = 2 * W + $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [W-1:0]  a [N][N],
  input  logic [W-1:0]  b [N][N],
  output logic          out_valid,
  output logic [CW-1:0] c [N][N]
);
  localparam int unsigned LAT = kom_latency(W);

  logic [2*W-1:0] prod [N][N][N];   // prod[i][j][k] = A[i][k] * B[k][j]

  for (genvar i = 0; i < N; i++) begin : g_i
    for (genvar j = 0; j < N; j++) begin : g_j
      for (genvar k = 0; k < N; k++) begin : g_k
        kom_mult #(.W(W)) u_mult (.clk, .a(a[i][k]), .b(b[k][j]), .p(prod[i][j][k]));
      end
      always_ff @(posedge clk) begin
        logic [CW-1:0] sum;
        sum = '0;
        for (int k = 0; k < N; k++) sum += CW'(prod[i][j][k]);
        c[i][j] <= sum;
      end
    end
  end

  logic [LAT:0] vpipe;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-1:0], in_valid};
  assign out_valid = vpipe[LAT];

endmodule
