// tb_ramp_workload -- a full carrier-frequency ramp through the DMA path, end to end.
//
// The laser-tuning run this generator is meant for sweeps the carrier by 10 MHz in 10 Hz
// steps, starting at 807 MHz with a 625 kHz, 1.01 rad phase modulation: one million tuning
// words per ramp, fetched from processor memory and applied one per update period. This
// test runs one such ramp on the default-size design (sample rate 9.8304 GS/s, one sample
// per clock). Only the update period is shortened, from 3736 cycles (380 ns) to 8 cycles,
// so that the million updates fit in a few million simulated cycles; the memory model
// generates the list arithmetically (FTW_k = FTW(807 MHz) + k * FTW(10 Hz)).
// Checks: every tuning word arrives in order and exactly 8 cycles after the previous one,
// the last one is 817 MHz, and every output sample equals I cos + Q sin for a carrier
// phase that is never reset, i.e. all million updates are phase-continuous.
module tb_ramp_workload;
  import esb_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real FS = 9.8304e9;
  localparam int  STEPS  = 1000000;
  localparam int  PERIOD = 8;

  logic clk = 0, rst_n = 0;
  logic reg_wr_en = 0;
  logic [REG_AW-1:0] reg_wr_addr = '0, reg_rd_addr = '0;
  logic [REG_DW-1:0] reg_wr_data = '0, reg_rd_data;
  logic trigger = 0;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [MEM_W-1:0]  mem_rsp_data;
  logic dma_busy, ftw_update;
  logic [FTW_W-1:0] ftw_current;
  logic signed [SAMPLE_W-1:0] i_out, q_out, v_out;

  longint checks = 0, failures = 0;

  esb_top dut (.*);

  ftw_mem_model #(.DEPTH(4), .LATENCY(2), .STALL(1'b0)) mem (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;

  initial begin
    repeat (STEPS * PERIOD + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ftw_t freq_to_ftw(input real f);
    return ftw_t'(longint'(f / FS * 281474976710656.0));
  endfunction

  ftw_t base, step;
  ftw_t c_ph = '0, c_ftw = '0, last_ftw = '0;
  ftw_t c_hist [4];
  sample_t i_prev = '0, q_prev = '0;
  bit   model_on = 0;
  longint cycle = 0, last_change = 0, n_changes = 0, bad_spacing = 0, bad_value = 0, bad_v = 0;

  always @(posedge clk) begin
    #1;
    cycle++;
    if (model_on) begin
      real c, s, vr, e;
      logic [31:0] p;
      c_ph = c_ph + c_ftw;
      c_ftw = ftw_current;
      for (int h = 3; h > 0; h--) c_hist[h] = c_hist[h-1];
      c_hist[0] = c_ph;
      p  = c_hist[3][47:16];
      c  = 32767.0 * $cos(2.0 * PI * real'(p) / 4294967296.0);
      s  = 32767.0 * $sin(2.0 * PI * real'(p) / 4294967296.0);
      vr = (real'(i_prev) * c + real'(q_prev) * s) / 32768.0;
      e  = real'(v_out) - vr; if (e < 0) e = -e;
      checks++;
      if (e > 3.0) begin bad_v++; failures++; end
      if (ftw_current != last_ftw) begin
        if (ftw_current != base + ftw_t'(n_changes) * step) bad_value++;
        if (n_changes > 0 && cycle - last_change != PERIOD) bad_spacing++;
        n_changes++;
        last_change = cycle;
        last_ftw = ftw_current;
      end
    end
    i_prev = i_out;
    q_prev = q_out;
  end

  task automatic wr(input reg_addr_e a, input logic [31:0] d);
    @(posedge clk) #2;
    reg_wr_en = 1; reg_wr_addr = a; reg_wr_data = d;
    @(posedge clk) #2;
    reg_wr_en = 0;
  endtask

  initial begin
    for (int h = 0; h < 4; h++) c_hist[h] = '0;
    base = freq_to_ftw(807.0e6);
    step = freq_to_ftw(10.0);
    mem.ramp      = 1'b1;
    mem.ramp_addr = 32'h0010_0000;
    mem.ramp_base = base;
    mem.ramp_step = step;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    model_on = 1;
    wr(REG_FTW_M, 32'(longint'(625.0e3 / FS * 4294967296.0)));
    wr(REG_BETA, 32'd8274);
    wr(REG_XI_I, 32'd16384);
    wr(REG_XI_Q, 32'd16384);
    wr(REG_DMA_ADDR, 32'h0010_0000);
    wr(REG_DMA_COUNT, 32'(STEPS + 1));
    wr(REG_DMA_PERIOD, 32'(PERIOD));
    @(posedge clk) #2 trigger = 1;
    repeat (4) @(posedge clk);
    #2 trigger = 0;
    wait (!dma_busy);
    repeat (50) @(posedge clk);
    $display("updates=%0d bad_values=%0d bad_spacing=%0d bad_samples=%0d final=%.3f Hz",
             n_changes, bad_value, bad_spacing, bad_v, real'(ftw_current) * FS / 281474976710656.0);
    $display("ramp of %0d steps: %.3f s at the 380 ns update period", STEPS, STEPS * 380.0e-9);
    checks += 4;
    if (n_changes != STEPS + 1) failures++;
    if (bad_value != 0) failures++;
    if (bad_spacing != 0) failures++;
    if (ftw_current != base + ftw_t'(STEPS) * step) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
