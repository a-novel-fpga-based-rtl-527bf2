// cnn_accel_top: the CNN hardware accelerator of Fig. 1.
//
// A shared bus joins the memory, the engine control unit (and through it the
// reconfigurable systolic engine) and the DSP hardware accelerator. The
// processor that masters the bus (a RISC-V core in the paper) and the DSP
// accelerator are outside this RTL: the bus master signals (cpu_*) and the
// DSP slave signals (dsp_*) are ports. The engine's data inputs and outputs
// (x_row, y_row) are ports too: they stand for the engine's I/O ports.
// Beside the engine sits the N^3-multiplier matrix unit (kom_matmul), the
// structure whose cost the paper tabulates for convolution-sized matrix
// products; its operand and result ports (mm_*) are top-level ports as well,
// since the paper does not say how it is attached.
//
// Use: the processor writes a configuration program into memory (word
// addresses 0x0000-0x0FFF), writes its address to CTRL_BASE (0x1000) and
// writes CTRL_START (0x1001). The control unit loads the coefficients and
// switch settings into the engine; cfg_busy is high meanwhile and cfg_done
// rises when CFG_END is reached (also readable at CTRL_STATUS, 0x1002).
// Samples are then streamed into x_row and results read from y_row, one
// sample per clock per row. Reconfiguring for another layer type is another
// program and another START. Bus reads return data the clock after the
// request. The coefficient width W may be at most the 32-bit bus width.
module cnn_accel_top
  import cnn_pkg::*;
#(
  parameter int unsigned ROWS      = 6,
  parameter int unsigned COLS      = 4,
  parameter int unsigned W         = 32,
  parameter int unsigned ACC_W     = 2 * W,
  parameter int unsigned MEM_DEPTH = 1024,
  parameter int unsigned MM_N      = 3,
  localparam int unsigned MM_CW    = 2 * W + $clog2(MM_N)
) (
  input  logic              clk,
  input  logic              rst_n,
  // processor bus master
  input  logic              cpu_req,
  input  logic              cpu_we,
  input  logic [BUS_AW-1:0] cpu_addr,
  input  logic [BUS_DW-1:0] cpu_wdata,
  output logic [BUS_DW-1:0] cpu_rdata,
  // DSP hardware accelerator (bus slave, external)
  output logic              dsp_sel,
  output logic              dsp_we,
  output logic [11:0]       dsp_addr,
  output logic [BUS_DW-1:0] dsp_wdata,
  input  logic [BUS_DW-1:0] dsp_rdata,
  // engine data ports
  input  logic [W-1:0]      x_row [ROWS],
  output logic [ACC_W-1:0]  y_row [ROWS],
  output logic              cfg_busy,
  output logic              cfg_done,
  // matrix multiplier data ports
  input  logic              mm_in_valid,
  input  logic [W-1:0]      mm_a [MM_N][MM_N],
  input  logic [W-1:0]      mm_b [MM_N][MM_N],
  output logic              mm_out_valid,
  output logic [MM_CW-1:0]  mm_c [MM_N][MM_N]
);
  localparam int unsigned MEM_AW = $clog2(MEM_DEPTH);

  initial begin
    assert (W <= BUS_DW && MEM_AW <= 12)
      else $error("cnn_accel_top: need W <= 32 and MEM_DEPTH <= 4096");
  end

  logic              mem_sel, ctrl_sel;
  logic [BUS_DW-1:0] mem_rdata, ctrl_rdata;
  logic [MEM_AW-1:0] prog_addr;
  logic [BUS_DW-1:0] prog_rdata;
  logic              cfg_we;
  cfg_kind_e         cfg_kind;
  logic [7:0]        cfg_idx;
  logic [W-1:0]      cfg_data;

  bus_decoder u_bus (
    .clk, .rst_n,
    .m_req  (cpu_req),
    .m_we   (cpu_we),
    .m_addr (cpu_addr),
    .m_rdata(cpu_rdata),
    .mem_sel, .ctrl_sel, .dsp_sel,
    .mem_rdata, .ctrl_rdata, .dsp_rdata
  );

  assign dsp_we    = cpu_we;
  assign dsp_addr  = cpu_addr[11:0];
  assign dsp_wdata = cpu_wdata;

  shared_mem #(.DEPTH(MEM_DEPTH), .DW(BUS_DW)) u_mem (
    .clk,
    .a_en   (mem_sel),
    .a_we   (cpu_we),
    .a_addr (cpu_addr[MEM_AW-1:0]),
    .a_wdata(cpu_wdata),
    .a_rdata(mem_rdata),
    .b_addr (prog_addr),
    .b_rdata(prog_rdata)
  );

  engine_ctrl #(.MEM_AW(MEM_AW), .W(W)) u_ctrl (
    .clk, .rst_n,
    .sel      (ctrl_sel),
    .we       (cpu_we),
    .addr     (cpu_addr[1:0]),
    .wdata    (cpu_wdata),
    .rdata    (ctrl_rdata),
    .mem_addr (prog_addr),
    .mem_rdata(prog_rdata),
    .cfg_we, .cfg_kind, .cfg_idx, .cfg_data,
    .busy     (cfg_busy),
    .done     (cfg_done)
  );

  systolic_engine #(.ROWS(ROWS), .COLS(COLS), .W(W), .ACC_W(ACC_W)) u_engine (
    .clk, .rst_n,
    .cfg_we, .cfg_kind, .cfg_idx, .cfg_data,
    .x_row, .y_row
  );

  kom_matmul #(.N(MM_N), .W(W)) u_matmul (
    .clk, .rst_n,
    .in_valid (mm_in_valid),
    .a        (mm_a),
    .b        (mm_b),
    .out_valid(mm_out_valid),
    .c        (mm_c)
  );

endmodule
