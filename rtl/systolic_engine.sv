// systolic_engine: the reconfigurable CNN systolic engine (Fig. 3).
//
// ROWS x COLS systolic cells, arranged as in Fig. 3 (six rows of four
// cells). Each row is a systolic_fir: the row's input sample is broadcast
// to its cells and the partial sum runs left to right. Between every two
// rows sits a switch_block that decides whether the lower row continues the
// upper row's partial-sum chain and whether it shares the upper row's input
// sample. With these settings and the cell coefficients, the same array
// performs:
//   - FIR filtering / 1-D convolution: rows cascaded, x shared: one filter
//     of up to ROWS*COLS taps, or independent rows of COLS taps each.
//   - 2-D convolution (K x K kernel, K <= ROWS, K <= COLS): K rows cascaded,
//     row i holding kernel row i right-aligned, each row fed its own image
//     row through its input port (with the skew given in the README).
//   - fully connected layer: each (cascaded group of) row(s) is one neuron;
//     feeding the input vector serially gives the dot product in one output
//     sample; x shared across groups computes several neurons at once.
//   - pooling: coefficients of 1 make a row sum its window (average pooling
//     up to the 1/window scale factor, which the cells cannot divide by).
//
// Configuration port: cfg_we with cfg_kind = CFG_WEIGHT writes cfg_data into
// the coefficient of cell cfg_idx = row*COLS + column (column 0 leftmost);
// CFG_SWITCH writes cfg_data[1:0] (sw_cfg_t) into the switch block of row
// boundary cfg_idx (between rows cfg_idx and cfg_idx+1). Row 0 always starts
// from a zero partial sum. Every row's output y_row[r] is an output port
// (the engine's I/O ports of Fig. 3, whose analog side is not modelled).
// Timing: see systolic_fir; each cascaded row adds COLS clocks to the path
// of the partial sum.
module systolic_engine
  import cnn_pkg::*;
#(
  parameter int unsigned ROWS  = 6,
  parameter int unsigned COLS  = 4,
  parameter int unsigned W     = 32,
  parameter int unsigned ACC_W = 2 * W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  cfg_kind_e        cfg_kind,
  input  logic [7:0]       cfg_idx,
  input  logic [W-1:0]     cfg_data,
  input  logic [W-1:0]     x_row [ROWS],
  output logic [ACC_W-1:0] y_row [ROWS]
);
  initial begin
    assert (ROWS >= 2 && ROWS * COLS <= 256)
      else $error("systolic_engine: need 2 <= ROWS and ROWS*COLS <= 256");
  end

  logic [W-1:0]     x_use [ROWS];   // sample each row actually uses
  logic [ACC_W-1:0] y_in  [ROWS];   // partial sum entering each row

  assign x_use[0] = x_row[0];
  assign y_in[0]  = '0;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic [COLS-1:0] h_we;
    for (genvar c = 0; c < COLS; c++) begin : g_we
      assign h_we[c] = cfg_we && cfg_kind == CFG_WEIGHT
                       && cfg_idx == 8'(r * COLS + c);
    end

    systolic_fir #(.TAPS(COLS), .W(W), .ACC_W(ACC_W)) u_row (
      .clk, .rst_n,
      .h_we,
      .h_din(cfg_data),
      .x    (x_use[r]),
      .y_in (y_in[r]),
      .y_out(y_row[r])
    );
  end

  for (genvar b = 0; b < ROWS - 1; b++) begin : g_sw
    sw_cfg_t unused_cfg;
    switch_block #(.W(W), .ACC_W(ACC_W)) u_sw (
      .clk, .rst_n,
      .cfg_we (cfg_we && cfg_kind == CFG_SWITCH && cfg_idx == 8'(b)),
      .cfg_din(sw_cfg_t'(cfg_data[1:0])),
      .cfg    (unused_cfg),
      .y_above(y_row[b]),
      .x_above(x_use[b]),
      .x_port (x_row[b+1]),
      .y_below(y_in[b+1]),
      .x_below(x_use[b+1])
    );
  end

endmodule
