// tb_switch_block: self-checking testbench of one switching block.
//
// For each of the four settings (cascade, x_from_above) written through the
// configuration port, random upper-row outputs, upper-row samples and port
// samples are applied, and the lower row's partial-sum input and sample are
// compared with the selection the setting asks for. Also checks that reset
// leaves the rows independent and fed from their own ports, and that the
// setting holds while cfg_we is low.
module tb_switch_block;
  import cnn_pkg::*;
  localparam int unsigned W     = 32;
  localparam int unsigned ACC_W = 64;

  logic             clk = 1'b0, rst_n = 1'b1;
  logic             cfg_we = 1'b0;
  sw_cfg_t          cfg_din = '0, cfg;
  logic [ACC_W-1:0] y_above = '0, y_below;
  logic [W-1:0]     x_above = '0, x_port = '0, x_below;
  int               checks = 0, failures = 0;

  switch_block #(.W(W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_routing(input logic cas, input logic xa);
    for (int i = 0; i < 20; i++) begin
      y_above = {$urandom, $urandom};
      x_above = $urandom;
      x_port  = $urandom;
      #1;
      checks++;
      if (y_below !== (cas ? y_above : '0) || x_below !== (xa ? x_above : x_port)) begin
        failures++;
        $display("FAIL cascade=%0b x_from_above=%0b: y_below=%h x_below=%h", cas, xa, y_below, x_below);
      end
    end
  endtask

  initial begin
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    check_routing(1'b0, 1'b0);           // reset state
    for (int s = 3; s >= 0; s--) begin
      cfg_we  = 1'b1;
      cfg_din = sw_cfg_t'(s[1:0]);
      @(negedge clk);
      cfg_we  = 1'b0;
      cfg_din = sw_cfg_t'(~s[1:0]);      // must be ignored while cfg_we is low
      @(negedge clk);
      checks++;
      if (cfg !== sw_cfg_t'(s[1:0])) begin failures++; $display("FAIL: cfg=%b", cfg); end
      check_routing(s[0], s[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
