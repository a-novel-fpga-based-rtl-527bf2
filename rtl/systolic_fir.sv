// systolic_fir: a row of systolic cells forming a 1-D FIR filter (Fig. 2).
//
// TAPS systolic cells sit side by side. The input sample x is broadcast to
// every cell (the vertical lines of Fig. 2) and the partial sum runs from
// the leftmost cell to the rightmost one, each cell adding h*x to it. As in
// the figure, the leftmost cell holds the oldest tap h(TAPS-1) and the
// rightmost cell holds h(0), so the output is
//     y[n] = sum_k h(k) * x[n-k]  (+ the partial sum entering on the left).
// Cell position c (0 = leftmost) holds h(TAPS-1-c); h_we[c] loads h_din into
// that position.
//
// Timing: with LAT = log2(W) the multiplier latency,
//     y_out(t) = sum_k h(k) * x(t-1-LAT-k) + y_in(t-TAPS).
// y_in lets several rows be chained into one longer filter; it passes
// through TAPS registers on its way to y_out. The figure shows four cells,
// the default of TAPS.
module systolic_fir #(
  parameter int unsigned TAPS  = 4,
  parameter int unsigned W     = 32,
  parameter int unsigned ACC_W = 2 * W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TAPS-1:0]  h_we,
  input  logic [W-1:0]     h_din,
  input  logic [W-1:0]     x,
  input  logic [ACC_W-1:0] y_in,
  output logic [ACC_W-1:0] y_out
);
  logic [ACC_W-1:0] y [TAPS+1];

  assign y[0] = y_in;

  for (genvar c = 0; c < TAPS; c++) begin : g_cell
    systolic_cell #(.W(W), .ACC_W(ACC_W)) u_cell (
      .clk, .rst_n,
      .h_we (h_we[c]),
      .h_din,
      .x,
      .y_in (y[c]),
      .y_out(y[c+1])
    );
  end

  assign y_out = y[TAPS];

endmodule
