// systolic_cell: one processing element of the systolic engine.
//
// The cell holds a coefficient register h (a filter tap or a weight loaded
// from memory), a kom_mult multiplier and an adder. Every clock it computes
//     Y_n = Y_(n-1) + h * X(n)
// where Y_(n-1) is the partial sum arriving from the cell on its left
// (y_in), X(n) is the vertical input sample (x) and Y_n leaves on the right
// (y_out). This is the cell of the paper's Fig. 2 and its equation.
//
// Timing: h*X(n) comes out of the multiplier pipeline LAT = log2(W) clocks
// after x is presented, and y_out is registered, so
//     y_out(t+1) = y_in(t) + h * x(t - LAT).
// Because every cell of a row delays its product by the same LAT, a chain of
// cells behaves as if its input stream were delayed by LAT clocks.
// h is written with h_we/h_din (its load path from memory is this design's
// choice). y_out and h are cleared by the active-low reset. The adder wraps
// modulo 2^ACC_W (the paper does not discuss overflow).
module systolic_cell #(
  parameter int unsigned W     = 32,
  parameter int unsigned ACC_W = 2 * W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             h_we,
  input  logic [W-1:0]     h_din,
  input  logic [W-1:0]     x,
  input  logic [ACC_W-1:0] y_in,
  output logic [ACC_W-1:0] y_out
);
  logic [W-1:0]   h;
  logic [2*W-1:0] prod;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    h <= '0;
    else if (h_we) h <= h_din;

  kom_mult #(.W(W)) u_mult (.clk, .a(h), .b(x), .p(prod));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) y_out <= '0;
    else        y_out <= y_in + ACC_W'(prod);

endmodule
