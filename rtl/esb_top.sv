// esb_top -- programmable-logic part of the QAM-based electronic-sideband rf generator.
//
// Register file -> I/Q generator -> (I, Q) -+
//                                           +-> QAM up-converter -> V samples
// DMA controller -> FTW -> NCO -> (cos, sin) +
//
// The processor programs the baseband (Wm, beta_m and the compensation values) and the DMA
// descriptor through the register port. A trigger starts the DMA controller, which reads a
// list of carrier tuning words from the processor's memory and updates the NCO at a fixed
// period; the NCO is phase-continuous, so the carrier can be swept while the laser stays
// locked. V = I cos + Q sin is the phase-modulated drive xi sin(Wc t + beta_m sin(Wm t)).
// In the device the NCO and the up-converter sit in the RF data converter, followed by an
// image-rejection filter, an inverse-sinc filter and the RF DAC; those three are vendor
// hardware not modelled here, so `v_out` is the sample stream that would enter them.
// Everything runs on one clock at one sample per clock, so f_s is the clock rate.
// Timing: v_out follows i_out/q_out and cos/sin by one cycle.
module esb_top
  import esb_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // processor register port
  input  logic                  reg_wr_en,
  input  logic [REG_AW-1:0]     reg_wr_addr,
  input  logic [REG_DW-1:0]     reg_wr_data,
  input  logic [REG_AW-1:0]     reg_rd_addr,
  output logic [REG_DW-1:0]     reg_rd_data,
  // external trigger of the DMA controller
  input  logic                  trigger,
  // processor memory read channel (FTW list)
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [ADDR_W-1:0]     mem_req_addr,
  input  logic                  mem_rsp_valid,
  input  logic [MEM_W-1:0]      mem_rsp_data,
  // observation and output
  output logic                  dma_busy,
  output logic                  ftw_update,   // one-cycle strobe: NCO FTW updated
  output logic [FTW_W-1:0]      ftw_current,
  output logic signed [SAMPLE_W-1:0] i_out,
  output logic signed [SAMPLE_W-1:0] q_out,
  output logic signed [SAMPLE_W-1:0] v_out    // to the IMR / inverse-sinc / RF DAC chain
);
  iq_params_t iq;
  dma_cfg_t   dma;
  ftw_t       dma_ftw;
  sample_t    nco_cos, nco_sin, i_s, q_s, v_s;

  esb_regs u_regs (
    .clk, .rst_n,
    .wr_en(reg_wr_en), .wr_addr(reg_wr_addr), .wr_data(reg_wr_data),
    .rd_addr(reg_rd_addr), .rd_data(reg_rd_data),
    .dma_busy, .iq, .dma
  );

  iq_generator u_iq (
    .clk, .rst_n, .p(iq), .i_out(i_s), .q_out(q_s)
  );

  dma_controller u_dma (
    .clk, .rst_n, .trigger, .cfg(dma),
    .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_data,
    .ftw_valid(ftw_update), .ftw(dma_ftw), .busy(dma_busy)
  );

  nco u_nco (
    .clk, .rst_n, .ftw_valid(ftw_update), .ftw_in(dma_ftw),
    .ftw(ftw_current), .cos_out(nco_cos), .sin_out(nco_sin)
  );

  qam_modulator u_qam (
    .clk, .i_in(i_s), .q_in(q_s), .cos_in(nco_cos), .sin_in(nco_sin), .v_out(v_s)
  );

  assign i_out = i_s;
  assign q_out = q_s;
  assign v_out = v_s;
endmodule
