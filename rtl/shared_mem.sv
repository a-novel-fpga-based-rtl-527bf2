// shared_mem: the accelerator's memory (Fig. 1), holding the configuration
// program of the systolic engine and any data the processor keeps there.
//
// A DEPTH x 32-bit synchronous RAM with two ports: port A on the system bus
// (read or write, one access per clock, read data valid the next clock) and
// a read-only port B for the engine control unit (address this clock, data
// next clock). The paper names the memory and says instructions are stored
// in it; its size, width and ports are this design's choice. Contents are
// not reset.
module shared_mem #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DW    = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A: system bus
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  // port B: control-unit read port
  input  logic [AW-1:0] b_addr,
  output logic [DW-1:0] b_rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
  end

  always_ff @(posedge clk)
    b_rdata <= mem[b_addr];

endmodule
