// tb_kom_matmul_sizes: the matrix sizes of the paper's resource tables.
//
// Builds kom_matmul for N = 5, 7 and 11 (32-bit elements for 5 and 7,
// 16-bit for 11 to keep the 1331-multiplier model quick to build), applies
// random matrix pairs on consecutive clocks to each and checks every element
// of every product, and its arrival log2(W) + 1 clocks later, against a
// product computed in the testbench. N = 3 is covered by tb_kom_matmul.
module tb_kom_matmul_sizes;
  localparam int NS [3] = '{5, 7, 11};
  localparam int WS [3] = '{32, 32, 16};
  localparam int NV     = 8;       // matrix pairs per size

  logic clk = 1'b0, rst_n = 1'b1;
  int   checks = 0, failures = 0;
  bit   fin [3];

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
  end

  for (genvar g = 0; g < 3; g++) begin : g_size
    localparam int N   = NS[g];
    localparam int W   = WS[g];
    localparam int CW  = 2 * W + $clog2(N);
    localparam int LAT = $clog2(W) + 1;

    logic          in_valid = 1'b0, out_valid;
    logic [W-1:0]  a [N][N], b [N][N];
    logic [CW-1:0] c [N][N];
    logic [CW-1:0] exp [NV][N][N];

    kom_matmul #(.N(N), .W(W)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .c);

    initial begin
      repeat (3) @(negedge clk);
      for (int t = 0; t < NV + LAT; t++) begin
        if (t < NV) begin
          foreach (a[i, j]) begin a[i][j] = W'($urandom); b[i][j] = W'($urandom); end
          foreach (exp[t][i, j]) begin
            exp[t][i][j] = '0;
            for (int k = 0; k < N; k++)
              exp[t][i][j] += CW'({{W{1'b0}}, a[i][k]} * {{W{1'b0}}, b[k][j]});
          end
          in_valid = 1'b1;
        end else in_valid = 1'b0;
        @(negedge clk);
        if (t + 1 - LAT >= 0 && t + 1 - LAT < NV) begin
          checks++;
          if (!out_valid) begin failures++; $display("FAIL N=%0d: out_valid low", N); end
          foreach (c[i, j]) begin
            checks++;
            if (c[i][j] !== exp[t+1-LAT][i][j]) begin
              failures++;
              if (failures < 10) $display("FAIL N=%0d pair %0d C[%0d][%0d]", N, t + 1 - LAT, i, j);
            end
          end
        end
      end
      fin[g] = 1'b1;
    end
  end

  initial begin
    fin = '{default: 1'b0};
    wait (fin[0] && fin[1] && fin[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
