// tb_systolic_fir: self-checking testbench of the systolic FIR row (Fig. 2).
//
// Loads the four taps h(3)..h(0) left to right, streams random samples and
// random partial sums into the row, and checks every clock that
//     y_out(t) = sum_k h(k) * x(t-1-LAT-k) + y_in(t-TAPS),
// the 1-D FIR equation y[n] = sum h(k)x[n-k] with the row's fixed latency
// of LAT+1 clocks. An impulse at the start also checks that the taps come
// out in the order h(0), h(1), h(2), h(3).
module tb_systolic_fir;
  localparam int unsigned TAPS  = 4;
  localparam int unsigned W     = 32;
  localparam int unsigned ACC_W = 2 * W;
  localparam int unsigned LAT   = cnn_pkg::kom_latency(W);
  localparam int unsigned N     = 600;

  logic             clk = 1'b0, rst_n = 1'b1;
  logic [TAPS-1:0]  h_we = '0;
  logic [W-1:0]     h_din = '0, x = '0;
  logic [ACC_W-1:0] y_in = '0, y_out;
  int               checks = 0, failures = 0;

  logic [W-1:0]     h  [TAPS];   // h[k] = h(k)
  logic [W-1:0]     xs [N];
  logic [ACC_W-1:0] ys [N];

  systolic_fir #(.TAPS(TAPS), .W(W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] xat(int t);
    return (t < 0) ? '0 : xs[t];
  endfunction
  function automatic logic [ACC_W-1:0] yat(int t);
    return (t < 0) ? '0 : ys[t];
  endfunction

  initial begin
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    // position c (0 = leftmost) holds h(TAPS-1-c)
    for (int k = 0; k < TAPS; k++) begin
      h[k] = (k + 1) * 1000 + $urandom_range(0, 999);
      h_we = '0;
      h_we[TAPS-1-k] = 1'b1;
      h_din = h[k];
      @(negedge clk);
    end
    h_we = '0;
    // flush the pipelines with zeros
    repeat (LAT + TAPS + 2) @(negedge clk);
    for (int t = 0; t < N; t++) begin
      if (t == 0)            xs[t] = 1;            // impulse
      else if (t < 2 * TAPS + LAT) xs[t] = 0;
      else                   xs[t] = $urandom;
      ys[t] = (t < 2 * TAPS + LAT) ? '0 : {$urandom, $urandom};
      x     = xs[t];
      y_in  = ys[t];
      @(negedge clk);
      // y_out now holds the value for time t+1
      begin
        logic [ACC_W-1:0] exp;
        exp = yat(t + 1 - TAPS);
        for (int k = 0; k < TAPS; k++)
          exp += ACC_W'({{W{1'b0}}, h[k]} * {{W{1'b0}}, xat(t - LAT - k)});
        checks++;
        if (y_out !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d: y_out=%0d expected %0d", t, y_out, exp);
        end
        // impulse response: h(k) appears LAT+1+k clocks after the impulse
        if (t >= LAT && t < LAT + TAPS) begin
          checks++;
          if (y_out !== ACC_W'(h[t-LAT])) begin
            failures++;
            $display("FAIL: impulse response tap %0d = %0d, expected %0d", t - LAT, y_out, h[t-LAT]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
