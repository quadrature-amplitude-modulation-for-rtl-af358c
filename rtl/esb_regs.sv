// esb_regs -- processor-facing register file of the ESB generator.
//
// The processor (the RFSoC's processing system, fed by a control PC) writes the QAM
// parameters (Wm, beta_m), the compensation parameters (phi', xi_I', xi_Q', Delta_I',
// Delta_Q') and the DMA descriptor through a simple synchronous word-write port, and reads
// any of them back, plus a status word, through a combinational read port. The map is
// reg_addr_e in esb_pkg; narrower fields take the low bits of the written word and read
// back zero-extended. Every
// register resets to zero, so the output is silent (xi = 0) until programmed. The paper
// shows only that the processor drives the I/Q generator and the DMA controller; the bus,
// the map and the reset values are this design's choices.
// Timing: a write at edge k is visible on `iq` / `dma` right after edge k.
module esb_regs
  import esb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [REG_AW-1:0] wr_addr,
  input  logic [REG_DW-1:0] wr_data,
  input  logic [REG_AW-1:0] rd_addr,
  output logic [REG_DW-1:0] rd_data,
  input  logic              dma_busy,
  output iq_params_t        iq,
  output dma_cfg_t          dma
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      iq  <= '0;
      dma <= '0;
    end else if (wr_en) begin
      unique case (wr_addr)
        REG_FTW_M:      iq.ftw_m       <= wr_data;
        REG_BETA:       iq.beta        <= wr_data[PARAM_W-1:0];
        REG_PHI:        iq.phi         <= wr_data[PARAM_W-1:0];
        REG_XI_I:       iq.xi_i        <= wr_data[PARAM_W-1:0];
        REG_XI_Q:       iq.xi_q        <= wr_data[PARAM_W-1:0];
        REG_DELTA_I:    iq.delta_i     <= wr_data[PARAM_W-1:0];
        REG_DELTA_Q:    iq.delta_q     <= wr_data[PARAM_W-1:0];
        REG_DMA_ADDR:   dma.src_addr   <= wr_data;
        REG_DMA_COUNT:  dma.count      <= wr_data;
        REG_DMA_PERIOD: dma.period     <= wr_data;
        default: ;  // read-only or unused address
      endcase
    end
  end

  always_comb begin
    unique case (rd_addr)
      REG_FTW_M:      rd_data = iq.ftw_m;
      REG_BETA:       rd_data = REG_DW'(iq.beta);
      REG_PHI:        rd_data = REG_DW'(unsigned'(iq.phi));
      REG_XI_I:       rd_data = REG_DW'(iq.xi_i);
      REG_XI_Q:       rd_data = REG_DW'(iq.xi_q);
      REG_DELTA_I:    rd_data = REG_DW'(unsigned'(iq.delta_i));
      REG_DELTA_Q:    rd_data = REG_DW'(unsigned'(iq.delta_q));
      REG_DMA_ADDR:   rd_data = dma.src_addr;
      REG_DMA_COUNT:  rd_data = dma.count;
      REG_DMA_PERIOD: rd_data = dma.period;
      REG_STATUS:     rd_data = REG_DW'(dma_busy);
      default:        rd_data = '0;
    endcase
  end
endmodule
