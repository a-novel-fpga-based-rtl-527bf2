// bus_decoder: the shared system bus of Fig. 1.
//
// One master (the processor) reaches the memory, the engine control unit and
// the DSP accelerator through one address space (cnn_pkg address map, word
// addresses, top four bits select the region). Each access lasts one clock:
// req, we, addr and wdata select exactly one slave, and read data returns
// the next clock from the slave that was selected (remembered in a register).
// Accesses to unmapped regions are ignored and read as zero. The paper draws
// only a bus joining the blocks; this single-master protocol is this design's
// choice.
module bus_decoder
  import cnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // master
  input  logic              m_req,
  input  logic              m_we,
  input  logic [BUS_AW-1:0] m_addr,
  output logic [BUS_DW-1:0] m_rdata,
  // slave selects (address, write data and we go to all slaves)
  output logic              mem_sel,
  output logic              ctrl_sel,
  output logic              dsp_sel,
  input  logic [BUS_DW-1:0] mem_rdata,
  input  logic [BUS_DW-1:0] ctrl_rdata,
  input  logic [BUS_DW-1:0] dsp_rdata
);
  logic [3:0] region, region_q;
  logic       rd_q;

  assign region   = m_addr[BUS_AW-1:BUS_AW-4];
  assign mem_sel  = m_req && region == REGION_MEM;
  assign ctrl_sel = m_req && region == REGION_CTRL;
  assign dsp_sel  = m_req && region == REGION_DSP;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      region_q <= '0;
      rd_q     <= 1'b0;
    end else begin
      region_q <= region;
      rd_q     <= m_req && !m_we;
    end

  always_comb begin
    m_rdata = '0;
    if (rd_q)
      unique case (region_q)
        REGION_MEM:  m_rdata = mem_rdata;
        REGION_CTRL: m_rdata = ctrl_rdata;
        REGION_DSP:  m_rdata = dsp_rdata;
        default:     m_rdata = '0;
      endcase
  end

  // one slave at a time
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({mem_sel, ctrl_sel, dsp_sel}));

endmodule
