// tb_engine_ctrl: self-checking testbench of the engine control unit.
//
// A behavioural synchronous RAM (address this clock, data the next) holds
// configuration programs. The testbench writes CTRL_BASE and CTRL_START over
// the bus port and records every configuration write the unit issues. It
// checks: the sequence of (kind, index, data) against the program; that NOP
// instructions issue nothing; STATUS busy/done and COUNT; the run time
// (2 clocks per header-only instruction, 4 per weight, counted from START to
// done); that START while busy is ignored; and that a program without END
// stops at the end of memory with the error bit set. Memory is kept small
// (MEM_AW = 6) so that the last test is short.
module tb_engine_ctrl;
  import cnn_pkg::*;
  localparam int unsigned MEM_AW = 6;
  localparam int unsigned W      = 32;

  logic              clk = 1'b0, rst_n = 1'b1;
  logic              sel = 1'b0, we = 1'b0;
  logic [1:0]        addr = '0;
  logic [BUS_DW-1:0] wdata = '0, rdata;
  logic [MEM_AW-1:0] mem_addr;
  logic [BUS_DW-1:0] mem_rdata;
  logic              cfg_we;
  cfg_kind_e         cfg_kind;
  logic [7:0]        cfg_idx;
  logic [W-1:0]      cfg_data;
  logic              busy, done;
  int                checks = 0, failures = 0;

  logic [BUS_DW-1:0] mem [2**MEM_AW];
  always_ff @(posedge clk) mem_rdata <= mem[mem_addr];

  engine_ctrl #(.MEM_AW(MEM_AW), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writes the engine receives, in order
  typedef struct { cfg_kind_e k; logic [7:0] i; logic [W-1:0] d; } wr_t;
  wr_t got [$];
  bit  armed = 1'b0;     // set once reset has been applied
  always @(posedge clk) if (armed && cfg_we) got.push_back('{cfg_kind, cfg_idx, cfg_data});

  task automatic bus_wr(input logic [1:0] a, input logic [31:0] d);
    sel = 1'b1; we = 1'b1; addr = a; wdata = d;
    @(negedge clk);
    sel = 1'b0; we = 1'b0;
  endtask
  task automatic bus_rd(input logic [1:0] a, output logic [31:0] d);
    sel = 1'b1; we = 1'b0; addr = a;
    @(negedge clk);
    sel = 1'b0;
    d = rdata;
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] hdr(cfg_kind_e k, int idx, int sw = 0);
    return {k, 12'd0, 2'(sw), 8'd0, 8'(idx)};
  endfunction

  initial begin
    wr_t exp [$];
    int  p, cycles;
    logic [31:0] d;
    foreach (mem[i]) mem[i] = hdr(CFG_NOP, 0);
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    armed = 1'b1;

    // program at word 5: 3 weights, 2 switches, 1 nop, end
    p = 5;
    mem[p++] = hdr(CFG_WEIGHT, 7);   mem[p++] = 32'hdead_beef; exp.push_back('{CFG_WEIGHT, 8'd7, 32'hdead_beef});
    mem[p++] = hdr(CFG_SWITCH, 2, 3);                          exp.push_back('{CFG_SWITCH, 8'd2, 32'd3});
    mem[p++] = hdr(CFG_NOP, 9);
    mem[p++] = hdr(CFG_WEIGHT, 0);   mem[p++] = 32'h0000_0001; exp.push_back('{CFG_WEIGHT, 8'd0, 32'd1});
    mem[p++] = hdr(CFG_SWITCH, 4, 1);                          exp.push_back('{CFG_SWITCH, 8'd4, 32'd1});
    mem[p++] = hdr(CFG_WEIGHT, 23);  mem[p++] = 32'h1234_5678; exp.push_back('{CFG_WEIGHT, 8'd23, 32'h1234_5678});
    mem[p++] = hdr(CFG_END, 0);

    bus_wr(CTRL_BASE, 5);
    bus_rd(CTRL_BASE, d);
    check(d == 5, "CTRL_BASE readback");
    bus_wr(CTRL_START, 1);           // the clock edge that takes START
    cycles = 0;
    check(busy, "busy after START");
    bus_wr(CTRL_START, 1);           // ignored while busy
    cycles++;
    while (!done) begin @(negedge clk); cycles++; end
    // done is set 3 weights x 4 + 2 switches x 2 + nop 2 + end 2 = 20 clock
    // edges after the edge that took START
    check(cycles == 3 * 4 + 2 * 2 + 2 + 2, $sformatf("run took %0d clocks, expected 20", cycles));
    check(!busy, "not busy when done");
    check(got.size() == exp.size(), $sformatf("%0d writes, expected %0d", got.size(), exp.size()));
    foreach (exp[i])
      if (i < got.size())
        check(got[i].k == exp[i].k && got[i].i == exp[i].i && got[i].d == exp[i].d,
              $sformatf("write %0d: kind %0d idx %0d data %h", i, got[i].k, got[i].i, got[i].d));
    bus_rd(CTRL_STATUS, d);
    check(d == 32'b010, $sformatf("STATUS=%b after a good run", d));
    bus_rd(CTRL_COUNT, d);
    check(d == 5, $sformatf("COUNT=%0d, expected 5", d));
    repeat (5) @(negedge clk);
    check(got.size() == exp.size(), "no writes after done");

    // program without END, starting near the end of memory
    got.delete();
    for (int i = 2**MEM_AW - 4; i < 2**MEM_AW; i++) mem[i] = hdr(CFG_SWITCH, 1, 2);
    bus_wr(CTRL_BASE, 2**MEM_AW - 4);
    bus_wr(CTRL_START, 1);
    while (!done) @(negedge clk);
    bus_rd(CTRL_STATUS, d);
    check(d == 32'b110, $sformatf("STATUS=%b after running off the end", d));
    check(got.size() == 4, $sformatf("%0d writes before the end of memory", got.size()));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
