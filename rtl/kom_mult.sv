// kom_mult: pipelined divide-and-conquer (Karatsuba-Ofman) unsigned multiplier.
//
// Each W-bit operand is split into a left (upper) half and a right (lower)
// half, and the product is rebuilt as
//     A*B = (Al*Bl)*2^W + (Ar*Bl)*2^(W/2) + (Al*Br)*2^(W/2) + Ar*Br
// which is the decomposition the paper writes for this multiplier (with its
// 'n' equal to W here). The four half-width products come from four
// instances of this same module, so the splitting repeats until the
// segments are 2 bits wide, where a 2x2-bit product is formed directly.
// Following the paper, four sub-products are used at every level (not the
// three-product Karatsuba form).
//
// Pipelining (this design's choice; the paper calls the multiplier
// "pipelined" without giving its stages): every level registers its
// result, so a new operand pair can enter every clock and the product
// appears LATENCY = log2(W) clocks later (5 clocks for W = 32). The
// pipeline holds no reset; its first LATENCY outputs after power-up are
// meaningless.
//
// Interface: a, b (W bits, unsigned), p (2W bits). W must be a power of two,
// at least 2. Operands are taken as unsigned: the paper's simulation
// (A = 30, B = 6, C = 180) shows only non-negative values.
module kom_mult #(
  parameter int unsigned W = 32
) (
  input  logic           clk,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] p
);
  localparam int unsigned LV = $clog2(W);  // number of levels = latency

  initial begin
    assert (W >= 2 && (W & (W - 1)) == 0)
      else $error("kom_mult: W=%0d must be a power of two >= 2", W);
  end

  for (genvar k = 0; k < LV; k++) begin : g_lvl
    localparam int unsigned S = 2 << k;      // segment width at this level
    localparam int unsigned N = W / S;       // segments per operand
    for (genvar i = 0; i < N; i++) begin : g_i     // segment of A
      for (genvar j = 0; j < N; j++) begin : g_j   // segment of B
        logic [2*S-1:0] prod;                       // A_seg(i) * B_seg(j)
        if (k == 0) begin : g_leaf
          always_ff @(posedge clk)
            prod <= {2'b00, a[2*i+1:2*i]} * {2'b00, b[2*j+1:2*j]};
        end else begin : g_comb
          // l = left (upper) half, r = right (lower) half of each segment
          logic [S-1:0]   p_ll, p_lr, p_rl, p_rr;
          logic [S:0]     p_mid;
          logic [2*S-1:0] mid;
          always_comb begin
            p_ll  = g_lvl[k-1].g_i[2*i+1].g_j[2*j+1].prod;
            p_lr  = g_lvl[k-1].g_i[2*i+1].g_j[2*j].prod;
            p_rl  = g_lvl[k-1].g_i[2*i].g_j[2*j+1].prod;
            p_rr  = g_lvl[k-1].g_i[2*i].g_j[2*j].prod;
            p_mid = {1'b0, p_rl} + {1'b0, p_lr};          // Ar*Bl + Al*Br
            mid   = {{(S-1){1'b0}}, p_mid} << (S/2);
          end
          // Al*Bl*2^S + Ar*Br is a plain concatenation
          always_ff @(posedge clk)
            prod <= {p_ll, p_rr} + mid;
        end
      end
    end
  end

  assign p = g_lvl[LV-1].g_i[0].g_j[0].prod;

endmodule
