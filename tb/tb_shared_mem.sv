// tb_shared_mem: self-checking testbench of the two-port shared memory.
//
// Fills the whole memory through port A with an address-dependent pattern,
// then reads it back through port A (bus) and port B (control unit) at
// the same time, each with a one-clock read latency, and compares with a
// testbench copy. Also checks that a port-A access with a_en low neither
// writes nor changes a_rdata, and that writes with random addresses land.
module tb_shared_mem;
  localparam int unsigned DEPTH = 1024;
  localparam int unsigned DW    = 32;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          a_en = 1'b0, a_we = 1'b0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [DW-1:0] a_wdata = '0, a_rdata, b_rdata;
  int            checks = 0, failures = 0;
  logic [DW-1:0] model [DEPTH];

  shared_mem #(.DEPTH(DEPTH), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10 * DEPTH) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = {16'(i), 16'(i * 7 + 3)};
      a_en = 1'b1; a_we = 1'b1; a_addr = AW'(i); a_wdata = model[i];
      @(negedge clk);
    end
    a_we = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      a_addr = AW'(i);
      b_addr = AW'(DEPTH - 1 - i);
      @(negedge clk);
      check(a_rdata == model[i], $sformatf("port A addr %0d: %h", i, a_rdata));
      check(b_rdata == model[DEPTH-1-i], $sformatf("port B addr %0d: %h", DEPTH - 1 - i, b_rdata));
    end
    // disabled port A: no write, a_rdata holds
    a_en = 1'b0; a_we = 1'b1; a_addr = 5; a_wdata = 32'hffff_ffff;
    @(negedge clk);
    check(a_rdata == model[DEPTH-1], "a_rdata changed while a_en low");
    a_we = 1'b0;
    b_addr = 5;
    @(negedge clk);
    check(b_rdata == model[5], "write happened with a_en low");
    // random writes, read back through port B
    for (int n = 0; n < 200; n++) begin
      int i;
      i = $urandom_range(0, DEPTH - 1);
      model[i] = $urandom;
      a_en = 1'b1; a_we = 1'b1; a_addr = AW'(i); a_wdata = model[i];
      @(negedge clk);
      a_en = 1'b0; a_we = 1'b0;
      b_addr = AW'(i);
      @(negedge clk);
      check(b_rdata == model[i], $sformatf("random write addr %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
