// tb_kom_mult: self-checking testbench of the pipelined Karatsuba-Ofman
// multiplier at its full 32-bit width.
//
// A new operand pair enters every clock (full throughput). Each product is
// compared with a 64-bit '*' computed in the testbench exactly log2(W) = 5
// clocks after its operands went in, which checks the latency as well as
// the value. Vectors: the 30 x 6 = 180 example, corner values (0, all ones,
// single bits) and random pairs.
module tb_kom_mult;
  localparam int unsigned W   = 32;
  localparam int unsigned LAT = cnn_pkg::kom_latency(W);
  localparam int unsigned N   = 2000;

  logic           clk = 1'b0;
  logic [W-1:0]   a = '0, b = '0;
  logic [2*W-1:0] p;
  int             checks = 0, failures = 0;
  logic [W-1:0]   va [N], vb [N];

  kom_mult #(.W(W)) dut (.clk, .a, .b, .p);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    va[0] = 30;           vb[0] = 6;
    va[1] = '1;           vb[1] = '1;
    va[2] = '0;           vb[2] = '1;
    va[3] = 32'h8000_0000; vb[3] = 32'h8000_0000;
    va[4] = 32'h0001_0000; vb[4] = 32'h0000_ffff;
    va[5] = 32'haaaa_aaaa; vb[5] = 32'h5555_5555;
    for (int i = 6; i < N; i++) begin
      va[i] = $urandom;
      vb[i] = (i % 7 == 0) ? '1 : $urandom;
    end
    for (int i = 0; i < N + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        logic [2*W-1:0] exp;
        exp = {{W{1'b0}}, va[i-LAT]} * {{W{1'b0}}, vb[i-LAT]};
        checks++;
        if (p !== exp) begin
          failures++;
          if (failures < 10)
            $display("FAIL: %0d * %0d gave %0d, expected %0d",
                     va[i-LAT], vb[i-LAT], p, exp);
        end
      end
      if (i < N) begin
        a = va[i];
        b = vb[i];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
