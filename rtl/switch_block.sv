// switch_block: configurable connection between two rows of the engine.
//
// The engine of Fig. 3 has a row of switching blocks between every two rows
// of systolic cells. This module is the connection for one such boundary,
// between an upper row and the row below it. Its configuration register
// (sw_cfg_t, written by the engine control unit) chooses:
//   cascade      : the lower row's partial-sum input is the upper row's
//                  output (1) or zero (0). Cascaded rows form one long chain,
//                  used for kernels spread over several rows (2-D
//                  convolution) and for long dot products.
//   x_from_above : the lower row's input sample is the upper row's sample
//                  (1, broadcast) or the lower row's own input port (0).
// The paper gives only the function of the switches ("the connection between
// the systolic cell is configured"); the two settings and the multiplexers
// are this design's choice. The three switching blocks drawn per boundary in
// Fig. 3 are merged into this one module. Routing is combinational; the
// configuration register is cleared by reset (rows independent, own ports).
module switch_block
  import cnn_pkg::*;
#(
  parameter int unsigned W     = 32,
  parameter int unsigned ACC_W = 2 * W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  sw_cfg_t          cfg_din,
  output sw_cfg_t          cfg,
  input  logic [ACC_W-1:0] y_above,   // output of the upper row's chain
  input  logic [W-1:0]     x_above,   // sample used by the upper row
  input  logic [W-1:0]     x_port,    // lower row's own input port
  output logic [ACC_W-1:0] y_below,   // partial-sum input of the lower row
  output logic [W-1:0]     x_below    // sample used by the lower row
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      cfg <= '0;
    else if (cfg_we) cfg <= cfg_din;

  always_comb begin
    y_below = cfg.cascade      ? y_above : '0;
    x_below = cfg.x_from_above ? x_above : x_port;
  end

endmodule
