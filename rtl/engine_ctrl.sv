// engine_ctrl: control unit of the reconfigurable systolic engine.
//
// The processor stores a configuration program in the shared memory, writes
// its word address to CTRL_BASE and writes CTRL_START. The control unit then
// reads the program word by word through its own memory port and applies it
// to the engine without further help from the processor:
//   CFG_WEIGHT header, value word -> loads a cell coefficient
//   CFG_SWITCH header             -> sets a switching block
//   CFG_NOP header                -> skipped
//   CFG_END header                -> finishes; STATUS.done is set
// (encoding in cnn_pkg). The paper states that configuration instructions are
// kept in memory and used to configure the hardware; this sequencer and its
// register interface are this design's own.
//
// Bus slave: one access per clock, sel/we/addr/wdata; read data is registered
// (valid the clock after sel). Registers: CTRL_BASE (r/w), CTRL_START
// (write), CTRL_STATUS (read {err, done, busy}), CTRL_COUNT (read, number of
// instructions applied). START while busy is ignored. If the program runs off
// the end of memory the run stops with err and done set.
// Memory port: mem_addr is presented for one clock and mem_rdata is read on
// the next (a synchronous RAM), so a switch instruction takes 2 clocks and a
// weight instruction 4.
module engine_ctrl
  import cnn_pkg::*;
#(
  parameter int unsigned MEM_AW = 10,
  parameter int unsigned W      = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // bus slave
  input  logic              sel,
  input  logic              we,
  input  logic [1:0]        addr,
  input  logic [BUS_DW-1:0] wdata,
  output logic [BUS_DW-1:0] rdata,
  // configuration-program read port
  output logic [MEM_AW-1:0] mem_addr,
  input  logic [BUS_DW-1:0] mem_rdata,
  // engine configuration port
  output logic              cfg_we,
  output cfg_kind_e         cfg_kind,
  output logic [7:0]        cfg_idx,
  output logic [W-1:0]      cfg_data,
  output logic              busy,
  output logic              done
);
  typedef enum logic [2:0] {
    S_IDLE, S_REQ_HDR, S_HDR, S_REQ_VAL, S_VAL
  } state_e;

  state_e            state;
  logic [MEM_AW-1:0] base, ptr;
  logic [7:0]        idx_q;
  logic [15:0]       count;
  logic              err;
  logic              last;     // ptr is the last word of memory
  cfg_kind_e         hdr_kind;

  assign mem_addr = ptr;
  assign busy     = state != S_IDLE;
  assign last     = ptr == '1;
  assign hdr_kind = cfg_kind_e'(mem_rdata[31:30]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      base  <= '0;
      ptr   <= '0;
      idx_q <= '0;
      count <= '0;
      err   <= 1'b0;
      done  <= 1'b0;
    end else begin
      if (sel && we && addr == CTRL_BASE) base <= wdata[MEM_AW-1:0];
      unique case (state)
        S_IDLE:
          if (sel && we && addr == CTRL_START) begin
            ptr   <= base;
            count <= '0;
            err   <= 1'b0;
            done  <= 1'b0;
            state <= S_REQ_HDR;
          end
        S_REQ_HDR: state <= S_HDR;
        S_HDR: begin
          idx_q <= mem_rdata[7:0];
          if (hdr_kind == CFG_END) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (last) begin
            err   <= 1'b1;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            ptr   <= ptr + 1'b1;
            if (hdr_kind != CFG_NOP) count <= count + 1'b1;
            state <= hdr_kind == CFG_WEIGHT ? S_REQ_VAL : S_REQ_HDR;
          end
        end
        S_REQ_VAL: state <= S_VAL;
        S_VAL: begin
          if (last) begin
            err   <= 1'b1;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            ptr   <= ptr + 1'b1;
            state <= S_REQ_HDR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Engine writes: a switch header is applied as it is read, a weight when
  // its value word arrives.
  always_comb begin
    cfg_we   = 1'b0;
    cfg_kind = CFG_NOP;
    cfg_idx  = idx_q;
    cfg_data = '0;
    if (state == S_HDR && hdr_kind == CFG_SWITCH) begin
      cfg_we   = 1'b1;
      cfg_kind = CFG_SWITCH;
      cfg_idx  = mem_rdata[7:0];
      cfg_data = W'(mem_rdata[17:16]);
    end else if (state == S_VAL) begin
      cfg_we   = 1'b1;
      cfg_kind = CFG_WEIGHT;
      cfg_data = mem_rdata[W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rdata <= '0;
    else if (sel && !we)
      unique case (addr)
        CTRL_BASE:   rdata <= BUS_DW'(base);
        CTRL_STATUS: rdata <= BUS_DW'({err, done, busy});
        CTRL_COUNT:  rdata <= BUS_DW'(count);
        default:     rdata <= '0;
      endcase

endmodule
