// tb_systolic_engine: self-checking testbench of the reconfigurable engine.
//
// Runs several phases. Each phase writes random coefficients into all
// ROWS x COLS cells and a random setting into every switching block through
// the configuration port, flushes the array with zero samples, then streams
// random samples into every row port and checks every row output every clock
// against a reference model kept in the testbench:
//   x_use[r](t) = x_from_above(r-1) ? x_use[r-1](t) : x_row[r](t)
//   y_in[r](t)  = cascade(r-1) ? y[r-1](t) : 0           (y_in[0] = 0)
//   y[r](t+1)   = sum_c w[r][c] * x_use[r](t-LAT-(COLS-1-c)) + y_in[r](t+1-COLS)
// The first two phases force the fully cascaded/broadcast setting (one long
// FIR) and the fully independent setting; the rest are random mixtures.
module tb_systolic_engine;
  import cnn_pkg::*;
  localparam int unsigned ROWS  = 6;
  localparam int unsigned COLS  = 4;
  localparam int unsigned W     = 32;
  localparam int unsigned ACC_W = 2 * W;
  localparam int unsigned LAT   = kom_latency(W);
  localparam int unsigned N     = 150;      // checked clocks per phase
  localparam int unsigned PHASES = 6;

  logic             clk = 1'b0, rst_n = 1'b1;
  logic             cfg_we = 1'b0;
  cfg_kind_e        cfg_kind = CFG_NOP;
  logic [7:0]       cfg_idx = '0;
  logic [W-1:0]     cfg_data = '0;
  logic [W-1:0]     x_row [ROWS];
  logic [ACC_W-1:0] y_row [ROWS];
  int               checks = 0, failures = 0;

  logic [W-1:0]     w   [ROWS][COLS];
  sw_cfg_t          sw  [ROWS];          // sw[b]: boundary between rows b, b+1
  logic [W-1:0]     xu  [N][ROWS];       // reference x_use
  logic [ACC_W-1:0] ey  [N+1][ROWS];     // reference y, ey[t][r] = y[r](t)

  systolic_engine #(.ROWS(ROWS), .COLS(COLS), .W(W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (PHASES * (N + 100) + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] xu_at(int t, int r);
    return (t < 0) ? '0 : xu[t][r];
  endfunction
  function automatic logic [ACC_W-1:0] ey_at(int t, int r);
    return (t < 0) ? '0 : ey[t][r];
  endfunction

  task automatic cfg_write(input cfg_kind_e k, input int idx, input logic [W-1:0] d);
    cfg_we = 1'b1; cfg_kind = k; cfg_idx = 8'(idx); cfg_data = d;
    @(negedge clk);
    cfg_we = 1'b0; cfg_kind = CFG_NOP;
  endtask

  initial begin
    foreach (x_row[r]) x_row[r] = '0;
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    for (int ph = 0; ph < PHASES; ph++) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          w[r][c] = (ph % 2) ? $urandom : $urandom_range(0, 65535);
          cfg_write(CFG_WEIGHT, r * COLS + c, w[r][c]);
        end
      for (int b = 0; b < ROWS - 1; b++) begin
        if (ph == 0)      sw[b] = '{x_from_above: 1'b1, cascade: 1'b1};
        else if (ph == 1) sw[b] = '{x_from_above: 1'b0, cascade: 1'b0};
        else              sw[b] = sw_cfg_t'($urandom_range(0, 3));
        cfg_write(CFG_SWITCH, b, W'(sw[b]));
      end
      // a weight write with the switch kind must not change any coefficient
      cfg_write(CFG_SWITCH, 200, '1);
      foreach (x_row[r]) x_row[r] = '0;
      repeat (LAT + ROWS * COLS + 4) @(negedge clk);   // flush
      ey[0] = '{default: '0};
      for (int t = 0; t < N; t++) begin
        for (int r = 0; r < ROWS; r++) begin
          x_row[r] = $urandom;
          xu[t][r] = (r > 0 && sw[r-1].x_from_above) ? xu[t][r-1] : x_row[r];
        end
        // reference for time t+1, row by row (a row may use the row above)
        for (int r = 0; r < ROWS; r++) begin
          logic [ACC_W-1:0] acc;
          acc = '0;
          if (r > 0 && sw[r-1].cascade) acc = ey_at(t + 1 - COLS, r - 1);
          for (int c = 0; c < COLS; c++)
            acc += ACC_W'({{W{1'b0}}, w[r][c]} *
                          {{W{1'b0}}, xu_at(t - LAT - (COLS - 1 - c), r)});
          ey[t+1][r] = acc;
        end
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (y_row[r] !== ey[t+1][r]) begin
            failures++;
            if (failures < 10)
              $display("FAIL phase %0d t=%0d row %0d: y=%h expected %h", ph, t, r, y_row[r], ey[t+1][r]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
