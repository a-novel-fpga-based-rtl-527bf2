// tb_cnn_accel_top: end-to-end testbench of the whole accelerator, with every
// parameter at its default (6 x 4 cells, 32-bit KOM multipliers, 1024-word
// memory).
//
// The testbench plays the processor: it writes configuration programs into
// the shared memory over the bus, starts the control unit, waits for
// cfg_done, then streams data through the engine's row ports and compares the
// row outputs with results computed directly in the testbench. Four
// programs reconfigure the same array in turn:
//   1. 2-D convolution: an 8 x 8 image with two 3 x 3 kernels at once
//      (rows 0-2 kernel A, rows 3-5 kernel B); all 2 x 36 valid outputs.
//   2. 2 x 2 pooling (stride 2, window sum) of an 8 x 8 image on rows 0-1.
//   3. fully connected layer: 3 neurons of 8 inputs (row pairs), input
//      vectors broadcast from row 0, 4 vectors back to back.
//   4. a 24-tap FIR filter over all cells, rows cascaded and x broadcast.
// Image row i of a K-row convolution enters row port i delayed by
// (K-1-i)*(IMG_W-COLS) clocks, the skew that lines the rows' partial sums up.
// Also checks: configuration run time (4 clocks per weight, 2 per switch,
// NOP or END), COUNT and STATUS registers, memory readback over the bus, and a
// bus access to the DSP accelerator port, and one 3 x 3 matrix product
// through the matrix unit with its latency. Each mechanism is counted and one
// that never happened counts as a failure.
module tb_cnn_accel_top;
  import cnn_pkg::*;
  localparam int unsigned ROWS  = 6;
  localparam int unsigned COLS  = 4;
  localparam int unsigned W     = 32;
  localparam int unsigned ACC_W = 2 * W;
  localparam int          LAT   = int'(kom_latency(W));
  localparam int          IMG_H = 8, IMG_W = 8;
  localparam int          TMAX  = 256;

  logic              clk = 1'b0, rst_n = 1'b1;
  logic              cpu_req = 1'b0, cpu_we = 1'b0;
  logic [BUS_AW-1:0] cpu_addr = '0;
  logic [BUS_DW-1:0] cpu_wdata = '0, cpu_rdata;
  logic              dsp_sel, dsp_we;
  logic [11:0]       dsp_addr;
  logic [BUS_DW-1:0] dsp_wdata, dsp_rdata;
  logic [W-1:0]      x_row [ROWS];
  logic [ACC_W-1:0]  y_row [ROWS];
  logic              cfg_busy, cfg_done;
  localparam int unsigned MM_N = 3, MM_CW = 2 * W + $clog2(MM_N);
  logic              mm_in_valid = 1'b0, mm_out_valid;
  logic [W-1:0]      mm_a [MM_N][MM_N], mm_b [MM_N][MM_N];
  logic [MM_CW-1:0]  mm_c [MM_N][MM_N];
  int                checks = 0, failures = 0;

  cnn_accel_top dut (.*);

  always #5 clk = ~clk;

  // behavioural stand-in for the DSP accelerator: reads return its address
  always_ff @(posedge clk) dsp_rdata <= {20'hd5d00, dsp_addr};

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_reconfig = 0, n_cascade = 0, n_broadcast = 0, n_independent = 0, n_nop = 0;
  int n_conv = 0, n_pool = 0, n_fc = 0, n_fir = 0, n_dsp = 0, n_mm = 0;

  logic [W-1:0]     wg   [ROWS][COLS];   // coefficients of the current program
  sw_cfg_t          sw   [ROWS-1];
  logic [W-1:0]     xin  [TMAX][ROWS];   // samples to stream
  logic [ACC_W-1:0] obs  [TMAX+1][ROWS]; // obs[t][r] = y_row[r] after t clocks
  logic [W-1:0]     img  [IMG_H][IMG_W];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic bus_wr(input logic [15:0] a, input logic [31:0] d);
    cpu_req = 1'b1; cpu_we = 1'b1; cpu_addr = a; cpu_wdata = d;
    @(negedge clk);
    cpu_req = 1'b0; cpu_we = 1'b0;
  endtask
  task automatic bus_rd(input logic [15:0] a, output logic [31:0] d);
    cpu_req = 1'b1; cpu_we = 1'b0; cpu_addr = a;
    @(negedge clk);
    cpu_req = 1'b0;
    d = cpu_rdata;
  endtask

  function automatic logic [31:0] hdr(cfg_kind_e k, int idx, int s = 0);
    return {k, 12'd0, 2'(s), 8'd0, 8'(idx)};
  endfunction

  // Write the program for wg/sw at word address base, run it, check timing.
  task automatic configure(input int base);
    int p, cycles;
    logic [31:0] d;
    p = base;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        bus_wr(16'(p++), hdr(CFG_WEIGHT, r * COLS + c));
        bus_wr(16'(p++), wg[r][c]);
      end
    for (int b = 0; b < ROWS - 1; b++) begin
      bus_wr(16'(p++), hdr(CFG_SWITCH, b, int'(sw[b])));
      if (sw[b].cascade) n_cascade++; else n_independent++;
      if (sw[b].x_from_above) n_broadcast++;
    end
    bus_wr(16'(p++), hdr(CFG_NOP, 0));
    bus_wr(16'(p++), hdr(CFG_END, 0));
    bus_rd(16'(base + 1), d);
    check(d == wg[0][0], "memory readback over the bus");
    bus_wr(16'h1000, 32'(base));
    bus_wr(16'h1001, 1);
    cycles = 0;
    while (!cfg_done) begin @(negedge clk); cycles++; end
    check(cycles == ROWS * COLS * 4 + (ROWS - 1) * 2 + 2 + 2,
          $sformatf("configuration took %0d clocks", cycles));
    bus_rd(16'h1002, d);
    check(d == 32'b010, $sformatf("STATUS=%b", d));
    bus_rd(16'h1003, d);
    check(d == ROWS * COLS + ROWS - 1, $sformatf("COUNT=%0d", d));
    n_nop++;
    n_reconfig++;
  endtask

  // Flush the array with zeros, then stream xin[0..len-1], recording outputs.
  task automatic stream(input int len);
    foreach (x_row[r]) x_row[r] = '0;
    repeat (LAT + ROWS * COLS + 4) @(negedge clk);
    for (int t = 0; t < len; t++) begin
      for (int r = 0; r < ROWS; r++) x_row[r] = xin[t][r];
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) obs[t+1][r] = y_row[r];
    end
    foreach (x_row[r]) x_row[r] = '0;
  endtask

  function automatic logic [W-1:0] pix(int q);   // raster-order pixel q
    return (q < 0 || q >= IMG_H * IMG_W) ? '0 : img[q / IMG_W][q % IMG_W];
  endfunction

  initial begin
    logic [W-1:0]     ka [3][3], kb [3][3];
    logic [W-1:0]     wfc [3][8];
    logic [W-1:0]     v [4][8];
    logic [W-1:0]     hfir [ROWS*COLS];
    logic [W-1:0]     xf [TMAX];
    logic [31:0]      d;

    foreach (x_row[r]) x_row[r] = '0;
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;

    // DSP accelerator port on the bus
    bus_wr(16'h2abc, 32'h5a5a_0001);
    bus_rd(16'h2123, d);
    check(d == 32'hd5d0_0123, $sformatf("DSP read %h", d));
    n_dsp++;

    // matrix unit: one 3 x 3 product, result after log2(W) + 1 clocks
    foreach (mm_a[i, j]) begin mm_a[i][j] = $urandom; mm_b[i][j] = $urandom; end
    mm_in_valid = 1'b1;
    @(negedge clk);
    mm_in_valid = 1'b0;
    repeat (LAT - 1) begin
      @(negedge clk);
      check(!mm_out_valid, "matrix result too early");
    end
    @(negedge clk);
    check(mm_out_valid, "matrix result not valid after log2(W) + 1 clocks");
    foreach (mm_c[i, j]) begin
      logic [MM_CW-1:0] e;
      e = '0;
      for (int k = 0; k < MM_N; k++) e += MM_CW'({32'd0, mm_a[i][k]} * {32'd0, mm_b[k][j]});
      check(mm_c[i][j] == e, $sformatf("matrix C[%0d][%0d]", i, j));
      n_mm++;
    end

    foreach (img[i, j]) img[i][j] = $urandom_range(0, 255);

    // ---- 1. 2-D convolution, two 3 x 3 kernels --------------------------
    foreach (ka[i, j]) begin ka[i][j] = $urandom_range(0, 255); kb[i][j] = $urandom_range(0, 255); end
    foreach (wg[r, c]) wg[r][c] = '0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        wg[i][j + COLS - 3]     = ka[i][j];   // kernel row i, right-aligned
        wg[3 + i][j + COLS - 3] = kb[i][j];
      end
    sw = '{'{1'b0, 1'b1}, '{1'b0, 1'b1}, '{1'b0, 1'b0}, '{1'b0, 1'b1}, '{1'b0, 1'b1}};
    configure(16'h100);
    for (int t = 0; t < TMAX; t++)
      for (int i = 0; i < 3; i++) begin
        xin[t][i]     = pix(t - (2 - i) * (IMG_W - COLS));
        xin[t][3 + i] = xin[t][i];
      end
    stream(IMG_H * IMG_W + 2 * (IMG_W + 1) + LAT + 4);
    for (int r0 = 0; r0 <= IMG_H - 3; r0++)
      for (int c0 = 0; c0 <= IMG_W - 3; c0++) begin
        logic [ACC_W-1:0] ea, eb;
        int tt;
        ea = '0; eb = '0;
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) begin
            ea += ACC_W'(ka[i][j] * img[r0 + i][c0 + j]);
            eb += ACC_W'(kb[i][j] * img[r0 + i][c0 + j]);
          end
        tt = r0 * IMG_W + c0 + 1 + LAT + 2 * (IMG_W + 1);
        check(obs[tt][2] == ea, $sformatf("conv A (%0d,%0d) = %0d, expected %0d", r0, c0, obs[tt][2], ea));
        check(obs[tt][5] == eb, $sformatf("conv B (%0d,%0d) = %0d, expected %0d", r0, c0, obs[tt][5], eb));
        n_conv += 2;
      end

    // ---- 2. 2 x 2 pooling, stride 2 (window sum) -------------------------
    foreach (wg[r, c]) wg[r][c] = '0;
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) wg[i][j + COLS - 2] = 1;
    sw = '{'{1'b0, 1'b1}, '{1'b0, 1'b0}, '{1'b0, 1'b0}, '{1'b0, 1'b0}, '{1'b0, 1'b0}};
    configure(16'h200);
    foreach (xin[t, r]) xin[t][r] = '0;
    for (int t = 0; t < TMAX; t++) begin
      xin[t][0] = pix(t - (IMG_W - COLS));
      xin[t][1] = pix(t);
    end
    stream(IMG_H * IMG_W + IMG_W + LAT + 4);
    for (int r0 = 0; r0 < IMG_H; r0 += 2)
      for (int c0 = 0; c0 < IMG_W; c0 += 2) begin
        logic [ACC_W-1:0] e;
        int tt;
        e = ACC_W'(img[r0][c0]) + img[r0][c0+1] + img[r0+1][c0] + img[r0+1][c0+1];
        tt = r0 * IMG_W + c0 + 1 + LAT + (IMG_W + 1);
        check(obs[tt][1] == e, $sformatf("pool (%0d,%0d) = %0d, expected %0d", r0, c0, obs[tt][1], e));
        n_pool++;
      end

    // ---- 3. fully connected: 3 neurons x 8 inputs -------------------------
    foreach (wfc[n, i]) wfc[n][i] = $urandom;
    foreach (v[k, i]) v[k][i] = $urandom;
    for (int n = 0; n < 3; n++)
      for (int c = 0; c < COLS; c++) begin
        wg[2*n][c]     = wfc[n][c];          // first half, reading order
        wg[2*n + 1][c] = wfc[n][COLS + c];   // second half
      end
    sw = '{'{1'b1, 1'b1}, '{1'b1, 1'b0}, '{1'b1, 1'b1}, '{1'b1, 1'b0}, '{1'b1, 1'b1}};
    configure(16'h300);
    foreach (xin[t, r]) xin[t][r] = '0;
    for (int k = 0; k < 4; k++)
      for (int i = 0; i < 8; i++) xin[8*k + i][0] = v[k][i];
    stream(32 + LAT + 4);
    for (int k = 0; k < 4; k++)
      for (int n = 0; n < 3; n++) begin
        logic [ACC_W-1:0] e;
        e = '0;
        for (int i = 0; i < 8; i++) e += ACC_W'({32'd0, wfc[n][i]} * {32'd0, v[k][i]});
        check(obs[8*k + 8 + LAT][2*n + 1] == e,
              $sformatf("FC vector %0d neuron %0d = %h, expected %h", k, n, obs[8*k + 8 + LAT][2*n + 1], e));
        n_fc++;
      end

    // ---- 4. 24-tap FIR over the whole array ------------------------------
    foreach (hfir[m]) hfir[m] = $urandom_range(0, 65535);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) wg[r][c] = hfir[(ROWS - 1 - r) * COLS + (COLS - 1 - c)];
    sw = '{default: '{1'b1, 1'b1}};
    configure(16'h3c0);
    foreach (xin[t, r]) xin[t][r] = '0;
    for (int t = 0; t < 120; t++) begin xf[t] = $urandom_range(0, 65535); xin[t][0] = xf[t]; end
    stream(120);
    for (int t = 1; t <= 120; t++) begin
      logic [ACC_W-1:0] e;
      e = '0;
      for (int m = 0; m < ROWS * COLS; m++)
        if (t - 1 - LAT - m >= 0) e += ACC_W'(hfir[m] * xf[t - 1 - LAT - m]);
      check(obs[t][ROWS-1] == e, $sformatf("FIR y(%0d) = %0d, expected %0d", t, obs[t][ROWS-1], e));
      n_fir++;
    end

    $display("mechanisms: reconfigurations=%0d cascaded=%0d independent=%0d broadcast=%0d nop=%0d",
             n_reconfig, n_cascade, n_independent, n_broadcast, n_nop);
    $display("            conv=%0d pool=%0d fc=%0d fir=%0d dsp=%0d matmul=%0d", n_conv, n_pool, n_fc, n_fir, n_dsp, n_mm);
    check(n_reconfig > 0 && n_cascade > 0 && n_independent > 0 && n_broadcast > 0 && n_nop > 0,
          "a configuration mechanism never happened");
    check(n_conv > 0 && n_pool > 0 && n_fc > 0 && n_fir > 0 && n_dsp > 0 && n_mm > 0,
          "a workload never ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
