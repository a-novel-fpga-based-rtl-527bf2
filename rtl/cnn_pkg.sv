// cnn_pkg: types and constants shared by the CNN accelerator.
//
// Holds the configuration-instruction format that the engine control unit
// reads from memory, the switching-block configuration word, the system-bus
// address map and the multiplier latency function.
//
// Configuration instructions are 32-bit words. A header word carries the
// instruction kind in bits [31:30]:
//   CFG_WEIGHT : bits [7:0] give the cell index (row*COLS + column); the next
//                word in memory is the coefficient h loaded into that cell.
//   CFG_SWITCH : bits [7:0] give the switching-block index (the row boundary
//                b, between engine rows b and b+1); bits [17:16] are the
//                switch setting (see sw_cfg_t).
//   CFG_END    : ends the configuration program.
// The paper says only that "the instructions to configure systolic cells ...
// is stored in a memory"; this encoding is this design's own.
package cnn_pkg;

  typedef enum logic [1:0] {
    CFG_WEIGHT = 2'd0,
    CFG_SWITCH = 2'd1,
    CFG_NOP    = 2'd2,
    CFG_END    = 2'd3
  } cfg_kind_e;

  // Setting of one switching block (one row boundary of the engine).
  //   cascade      : 1 = the lower row's partial-sum chain starts from the
  //                  upper row's output (rows join into one longer chain),
  //                  0 = it starts from zero (independent rows).
  //   x_from_above : 1 = the lower row takes the same input sample as the
  //                  upper row (broadcast), 0 = it takes its own input port.
  typedef struct packed {
    logic x_from_above;
    logic cascade;
  } sw_cfg_t;

  // System-bus word address map (16-bit word addresses).
  localparam int unsigned BUS_AW      = 16;
  localparam int unsigned BUS_DW      = 32;
  localparam logic [3:0]  REGION_MEM  = 4'h0;  // 0x0000-0x0FFF shared memory
  localparam logic [3:0]  REGION_CTRL = 4'h1;  // 0x1000-0x1FFF engine control unit
  localparam logic [3:0]  REGION_DSP  = 4'h2;  // 0x2000-0x2FFF DSP accelerator (external)

  // Engine control-unit registers (low two address bits inside REGION_CTRL).
  localparam logic [1:0] CTRL_BASE   = 2'd0;  // word address of the configuration program
  localparam logic [1:0] CTRL_START  = 2'd1;  // write: start; read: 0
  localparam logic [1:0] CTRL_STATUS = 2'd2;  // read: {done, busy}
  localparam logic [1:0] CTRL_COUNT  = 2'd3;  // read: instructions applied by the last run

  // Pipeline latency of kom_mult for operand width w (a power of two >= 2):
  // one register stage per level of halving, the 2-bit leaves included.
  function automatic int unsigned kom_latency(input int unsigned w);
    return $clog2(w);
  endfunction

endpackage
