// tb_kom_matmul: self-checking testbench of the parallel matrix multiplier
// (N = 3, W = 32, the defaults).
//
// Applies a random pair of matrices on most clocks (in_valid random, some
// all-ones corner cases), and checks that each result comes out with
// out_valid exactly log2(W) + 1 clocks later and equals a matrix product
// computed in the testbench. Also checks that out_valid stays low for
// clocks without input.
module tb_kom_matmul;
  localparam int unsigned N   = 3;
  localparam int unsigned W   = 32;
  localparam int unsigned CW  = 2 * W + $clog2(N);
  localparam int          LAT = int'(cnn_pkg::kom_latency(W)) + 1;
  localparam int          T   = 300;

  logic          clk = 1'b0, rst_n = 1'b1;
  logic          in_valid = 1'b0, out_valid;
  logic [W-1:0]  a [N][N], b [N][N];
  logic [CW-1:0] c [N][N];
  int            checks = 0, failures = 0;

  logic          vs [T];
  logic [CW-1:0] exp [T][N][N];

  kom_matmul #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (T + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (a[i, j]) begin a[i][j] = '0; b[i][j] = '0; end
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < T + LAT; t++) begin
      if (t < T) begin
        vs[t] = $urandom_range(0, 3) != 0;
        foreach (a[i, j]) begin
          a[i][j] = (t % 17 == 0) ? '1 : $urandom;
          b[i][j] = (t % 17 == 0) ? '1 : $urandom;
        end
        foreach (exp[t][i, j]) begin
          exp[t][i][j] = '0;
          for (int k = 0; k < N; k++)
            exp[t][i][j] += CW'({{W{1'b0}}, a[i][k]} * {{W{1'b0}}, b[k][j]});
        end
        in_valid = vs[t];
      end else in_valid = 1'b0;
      @(negedge clk);
      // after this clock, the output belongs to the input of clock t+1-LAT
      if (t + 1 - LAT >= 0 && t + 1 - LAT < T) begin
        int s;
        s = t + 1 - LAT;
        checks++;
        if (out_valid !== vs[s]) begin
          failures++;
          $display("FAIL: out_valid=%0b for input %0d (valid %0b)", out_valid, s, vs[s]);
        end
        if (vs[s])
          foreach (c[i, j]) begin
            checks++;
            if (c[i][j] !== exp[s][i][j]) begin
              failures++;
              if (failures < 10) $display("FAIL: input %0d C[%0d][%0d]=%h expected %h", s, i, j, c[i][j], exp[s][i][j]);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
