// tb_cnn_conv_fullsize: 3 x 3 convolution over full network-size images.
//
// Runs the accelerator at its default parameters on one input channel of the
// image sizes of the networks the design targets: 224 x 224 (VGG16/VGG19)
// and 227 x 227 (AlexNet), each with two 3 x 3 kernels at once (rows 0-2 and
// rows 3-5 of the engine). The testbench acts as the host: it writes the
// configuration program over the bus, starts the control unit, then streams
// the image in raster order into the row ports with the row skew
// (2-i)*(IMG_W-COLS) and checks every valid output window of both kernels
// against a direct 2-D convolution. Pixels come from a hash of their index,
// so no image data is stored.
module tb_cnn_conv_fullsize;
  import cnn_pkg::*;
  localparam int unsigned ROWS  = 6;
  localparam int unsigned COLS  = 4;
  localparam int unsigned W     = 32;
  localparam int unsigned ACC_W = 2 * W;
  localparam int          LAT   = int'(kom_latency(W));
  localparam int unsigned MM_N  = 3, MM_CW = 2 * W + $clog2(MM_N);

  logic              clk = 1'b0, rst_n = 1'b1;
  logic              cpu_req = 1'b0, cpu_we = 1'b0;
  logic [BUS_AW-1:0] cpu_addr = '0;
  logic [BUS_DW-1:0] cpu_wdata = '0, cpu_rdata;
  logic              dsp_sel, dsp_we;
  logic [11:0]       dsp_addr;
  logic [BUS_DW-1:0] dsp_wdata, dsp_rdata = '0;
  logic [W-1:0]      x_row [ROWS];
  logic [ACC_W-1:0]  y_row [ROWS];
  logic              cfg_busy, cfg_done;
  logic              mm_in_valid = 1'b0, mm_out_valid;
  logic [W-1:0]      mm_a [MM_N][MM_N], mm_b [MM_N][MM_N];
  logic [MM_CW-1:0]  mm_c [MM_N][MM_N];
  int                checks = 0, failures = 0;

  cnn_accel_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bus_wr(input logic [15:0] a, input logic [31:0] d);
    cpu_req = 1'b1; cpu_we = 1'b1; cpu_addr = a; cpu_wdata = d;
    @(negedge clk);
    cpu_req = 1'b0; cpu_we = 1'b0;
  endtask

  function automatic logic [31:0] hdr(cfg_kind_e k, int idx, int s = 0);
    return {k, 12'd0, 2'(s), 8'd0, 8'(idx)};
  endfunction

  // pixel q of an h x w image in raster order, 8-bit, 0 outside the image
  function automatic logic [W-1:0] pix(int q, int h, int w, int seed);
    logic [31:0] v;
    if (q < 0 || q >= h * w) return '0;
    v = 32'(q) * 32'd2654435761 + 32'(seed) * 32'd40503;
    return W'(v[23:16]);
  endfunction

  task automatic run_image(input int h, input int w, input int seed);
    logic [W-1:0] ka [3][3], kb [3][3];
    int p, n_ok;
    foreach (ka[i, j]) begin ka[i][j] = $urandom_range(0, 255); kb[i][j] = $urandom_range(0, 255); end
    // program: kernels right-aligned in rows 0-2 and 3-5, rows 0-1-2 and
    // 3-4-5 cascaded, every row fed from its own port
    p = 16'h040;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        logic [W-1:0] v;
        v = '0;
        if (c >= COLS - 3) v = (r < 3) ? ka[r][c-(COLS-3)] : kb[r-3][c-(COLS-3)];
        bus_wr(16'(p++), hdr(CFG_WEIGHT, r * COLS + c));
        bus_wr(16'(p++), v);
      end
    for (int b = 0; b < ROWS - 1; b++) bus_wr(16'(p++), hdr(CFG_SWITCH, b, (b == 2) ? 0 : 1));
    bus_wr(16'(p++), hdr(CFG_END, 0));
    bus_wr(16'h1000, 32'h040);
    bus_wr(16'h1001, 1);
    while (!cfg_done) @(negedge clk);
    foreach (x_row[r]) x_row[r] = '0;
    repeat (LAT + ROWS * COLS + 4) @(negedge clk);
    n_ok = 0;
    for (int t = 0; t < h * w + 2 * (w + 1) + LAT + 2; t++) begin
      int q;
      for (int i = 0; i < 3; i++) begin
        x_row[i]     = pix(t - (2 - i) * (w - COLS), h, w, seed);
        x_row[3 + i] = x_row[i];
      end
      @(negedge clk);
      // y_row now holds the value for clock t+1
      q = t + 1 - (1 + LAT + 2 * (w + 1));       // top-left pixel of the window
      if (q >= 0 && q / w <= h - 3 && q % w <= w - 3) begin
        logic [ACC_W-1:0] ea, eb;
        ea = '0; eb = '0;
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) begin
            ea += ACC_W'(ka[i][j] * pix(q + i * w + j, h, w, seed));
            eb += ACC_W'(kb[i][j] * pix(q + i * w + j, h, w, seed));
          end
        checks += 2;
        if (y_row[2] !== ea || y_row[5] !== eb) begin
          failures++;
          if (failures < 10)
            $display("FAIL %0dx%0d window (%0d,%0d): %0d %0d, expected %0d %0d",
                     h, w, q / w, q % w, y_row[2], y_row[5], ea, eb);
        end else n_ok++;
      end
    end
    $display("%0d x %0d image: %0d output windows per kernel checked", h, w, n_ok);
    checks++;
    if (n_ok != (h - 2) * (w - 2)) begin
      failures++;
      $display("FAIL: %0d windows matched, expected %0d", n_ok, (h - 2) * (w - 2));
    end
  endtask

  initial begin
    foreach (x_row[r]) x_row[r] = '0;
    foreach (mm_a[i, j]) begin mm_a[i][j] = '0; mm_b[i][j] = '0; end
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    run_image(224, 224, 1);   // VGG16 / VGG19 input size
    run_image(227, 227, 2);   // AlexNet input size
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
