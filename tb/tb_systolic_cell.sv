// tb_systolic_cell: self-checking testbench of one systolic cell.
//
// Loads a coefficient h, then streams random samples x and partial sums
// y_in, one per clock, and checks every clock that
//     y_out(t+1) = y_in(t) + h * x(t - LAT),   LAT = log2(W),
// i.e. the cell equation Y_n = Y_(n-1) + h.X(n) with the multiplier's
// pipeline delay. h is reloaded in the middle of the run; checks resume
// once the old h has left the multiplier pipeline.
module tb_systolic_cell;
  localparam int unsigned W     = 32;
  localparam int unsigned ACC_W = 2 * W;
  localparam int unsigned LAT   = cnn_pkg::kom_latency(W);
  localparam int unsigned N     = 1000;

  logic             clk = 1'b0, rst_n = 1'b1;
  logic             h_we = 1'b0;
  logic [W-1:0]     h_din = '0, x = '0;
  logic [ACC_W-1:0] y_in = '0, y_out;
  int               checks = 0, failures = 0;

  logic [W-1:0]     xs [N];
  logic [ACC_W-1:0] ys [N];
  logic [W-1:0]     hs [N];   // coefficient in force when x(t) entered

  systolic_cell #(.W(W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] h;
    @(negedge clk);
    rst_n = 1'b0;                    // asynchronous reset pulse
    @(negedge clk);
    checks++;
    if (y_out !== '0) begin failures++; $display("FAIL: y_out not cleared by reset"); end
    rst_n = 1'b1;
    @(negedge clk);
    h = 32'd123457;
    h_we = 1'b1; h_din = h;
    @(negedge clk);
    h_we = 1'b0;
    for (int t = 0; t < N; t++) begin
      if (t == N / 2) begin          // reload the coefficient
        h = $urandom;
        h_we = 1'b1; h_din = h;
      end else h_we = 1'b0;
      // the new h is in the register from the next clock on
      hs[t] = (t > N / 2) ? h : (t == N / 2 ? hs[t-1] : h);
      xs[t] = $urandom;
      ys[t] = {$urandom, $urandom};
      x     = xs[t];
      y_in  = ys[t];
      @(negedge clk);
      // y_out now = y_in(t) + h * x(t - LAT)
      if (t >= LAT) begin
        logic [ACC_W-1:0] exp;
        exp = ys[t] + ACC_W'({{W{1'b0}}, hs[t-LAT]} * {{W{1'b0}}, xs[t-LAT]});
        checks++;
        if (y_out !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d: y_out=%h expected %h", t, y_out, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
