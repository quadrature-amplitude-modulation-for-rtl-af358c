// dma_controller -- streams a list of carrier tuning words from memory to the NCO.
//
// The processor leaves a list of FTWs in memory (one 64-bit little-endian entry per FTW,
// FTW in bits 47:0) and writes the descriptor: start address, number of entries and the
// update period in clock cycles. A rising edge on `trigger` while idle starts the transfer.
// The controller reads one entry ahead over a valid/ready read-request channel and a
// response channel (`mem_rsp_valid` one or more cycles after the accepted request), and
// hands the FTWs to the NCO with a one-cycle `ftw_valid` strobe: the first as soon as it has
// arrived, each later one exactly `period` cycles after the previous one, provided memory
// answers within `period` cycles (otherwise as soon as it arrives). When all entries are
// out, `busy` drops. Triggers while busy are ignored. The paper gives the block's role
// (DMA-driven FTW updates on a trigger, about 380 ns apart in the authors' build); the
// memory channel, the one-entry prefetch buffer, the trigger synchroniser and the
// programmable period are this design's choices.
// Timing: trigger is synchronised by two flip-flops; its rising edge starts the fetch of the
// first entry 3 cycles later.
module dma_controller
  import esb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trigger,
  input  dma_cfg_t          cfg,
  // memory read channel
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [MEM_W-1:0]  mem_rsp_data,
  // to the NCO
  output logic              ftw_valid,
  output ftw_t              ftw,
  output logic              busy
);
  logic [2:0]        trig_sync;
  logic              trig_rise;
  logic [ADDR_W-1:0] rd_addr;
  logic [31:0]       to_fetch, to_apply, timer;
  logic              outstanding, buf_valid;
  ftw_t              buf_ftw;
  logic              apply;

  always_ff @(posedge clk) begin
    if (!rst_n) trig_sync <= '0;
    else        trig_sync <= {trig_sync[1:0], trigger};
  end
  assign trig_rise = trig_sync[1] & ~trig_sync[2];

  assign mem_req_valid = busy && to_fetch != 0 && !buf_valid && !outstanding;
  assign mem_req_addr  = rd_addr;
  assign apply         = busy && buf_valid && timer == 0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      rd_addr     <= '0;
      to_fetch    <= '0;
      to_apply    <= '0;
      timer       <= '0;
      outstanding <= 1'b0;
      buf_valid   <= 1'b0;
      buf_ftw     <= '0;
      ftw_valid   <= 1'b0;
      ftw         <= '0;
    end else begin
      ftw_valid <= 1'b0;
      if (!busy) begin
        if (trig_rise && cfg.count != 0) begin
          busy        <= 1'b1;
          rd_addr     <= cfg.src_addr;
          to_fetch    <= cfg.count;
          to_apply    <= cfg.count;
          timer       <= '0;
          outstanding <= 1'b0;
          buf_valid   <= 1'b0;
        end
      end else begin
        if (timer != 0) timer <= timer - 1;
        if (mem_req_valid && mem_req_ready) begin
          outstanding <= 1'b1;
          rd_addr     <= rd_addr + ADDR_W'(MEM_W / 8);
          to_fetch    <= to_fetch - 1;
        end
        if (outstanding && mem_rsp_valid) begin
          outstanding <= 1'b0;
          buf_valid   <= 1'b1;
          buf_ftw     <= mem_rsp_data[FTW_W-1:0];
        end
        if (apply) begin
          ftw_valid <= 1'b1;
          ftw       <= buf_ftw;
          buf_valid <= 1'b0;
          timer     <= (cfg.period == 0) ? '0 : cfg.period - 1;
          to_apply  <= to_apply - 1;
          if (to_apply == 1) busy <= 1'b0;
        end
      end
    end
  end

  // A request, once raised, holds its address until it is accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));
  // A response only comes for an accepted, unanswered request.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> outstanding);
endmodule
