// tb_bus_decoder: self-checking testbench of the system-bus decoder.
//
// Issues random reads and writes over the whole 16-bit address space and
// checks that exactly the slave owning the region (memory 0x0xxx, control
// unit 0x1xxx, DSP accelerator 0x2xxx, nothing elsewhere) is selected, and
// that read data returns the clock after the request from that slave, zero
// for an unmapped address or a write.
module tb_bus_decoder;
  import cnn_pkg::*;

  logic              clk = 1'b0, rst_n = 1'b1;
  logic              m_req = 1'b0, m_we = 1'b0;
  logic [BUS_AW-1:0] m_addr = '0;
  logic [BUS_DW-1:0] m_rdata;
  logic              mem_sel, ctrl_sel, dsp_sel;
  logic [BUS_DW-1:0] mem_rdata = 32'h1111_0000, ctrl_rdata = 32'h2222_0000, dsp_rdata = 32'h3333_0000;
  int                checks = 0, failures = 0;

  bus_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BUS_DW-1:0] exp_rd;
    @(negedge clk);
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    exp_rd = '0;
    for (int n = 0; n < 2000; n++) begin
      logic [3:0] reg4;
      m_req  = $urandom_range(0, 3) != 0;
      m_we   = $urandom_range(0, 1);
      reg4   = (n % 5 == 0) ? 4'($urandom_range(3, 15)) : 4'($urandom_range(0, 2));
      m_addr = {reg4, 12'($urandom)};
      #1;
      checks++;
      if (mem_sel  !== (m_req && reg4 == 4'h0) ||
          ctrl_sel !== (m_req && reg4 == 4'h1) ||
          dsp_sel  !== (m_req && reg4 == 4'h2)) begin
        failures++;
        if (failures < 10) $display("FAIL: addr %h req %0b: sel mem/ctrl/dsp = %0b%0b%0b", m_addr, m_req, mem_sel, ctrl_sel, dsp_sel);
      end
      @(negedge clk);
      // the request has been taken; the slaves now present read data
      mem_rdata  = 32'h1111_0000 | 32'(n);
      ctrl_rdata = 32'h2222_0000 | 32'(n);
      dsp_rdata  = 32'h3333_0000 | 32'(n);
      exp_rd = '0;
      if (m_req && !m_we)
        unique case (reg4)
          4'h0: exp_rd = mem_rdata;
          4'h1: exp_rd = ctrl_rdata;
          4'h2: exp_rd = dsp_rdata;
          default: exp_rd = '0;
        endcase
      #1;
      checks++;
      if (m_rdata !== exp_rd) begin
        failures++;
        if (failures < 10) $display("FAIL: read data %h expected %h", m_rdata, exp_rd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
