// tb_esb_top -- end-to-end test of the ESB rf generator at its default size.
//
// Sample rate taken as the device's 9.8304 GS/s, one sample per clock. The processor's part
// is played by tasks writing the register port; its memory by ftw_mem_model. Sequence:
//   1. beta_m = 1.01 rad, Wm/2pi = 3.125 MHz, xi = 0.5 full scale, no compensation;
//      a one-entry DMA list sets the carrier to 1.5 GHz.
//   2. Over one modulation period the RMS I/Q magnitude error and RMS I/Q phase error
//      (phase measured against beta_m sin(Wm t)) must both be below 0.3 %.
//   2b. Carrier sweep: 350 MHz to 1.75 GHz in five steps, errors re-measured at each.
//   3. Frequency jump: a one-entry list moves the carrier from 1 GHz to 100 MHz.
//   4. Stepwise ramp: a five-entry list 10 -> 100 MHz, one update every 3736 cycles
//      (380 ns at 9.8304 GS/s); spacing is checked, a trigger during the ramp is ignored.
//   5. Carrier moved to 1.015 GHz; injected impairment Delta_I' = -0.3 xi: the mean of I must move by -0.3 xi and the RMS
//      magnitude error must exceed 0.3 %; with phi' = 3 degrees the RMS phase error must rise;
//      removing them restores the < 0.3 % figures.
// Throughout, every output sample V is compared with I cos + Q sin computed from the
// observed I, Q and a testbench carrier phase that follows the tuning word readback and is
// never reset, so any phase jump at an FTW update is caught. Each mechanism (DMA update,
// phase-continuous update, jump, ramp step, ignored trigger, impairment offset, status
// readback) is counted; one that never happens counts as a failure.
module tb_esb_top;
  import esb_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real FS = 9.8304e9;
  localparam int  PERIOD_380NS = 3736;   // 380 ns * 9.8304 GS/s

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

  int checks = 0, failures = 0;
  int n_updates = 0, n_sweep = 0, n_contin = 0, n_jump = 0, n_ramp = 0, n_ignored = 0, n_offset = 0, n_status = 0;

  esb_top dut (.*);

  ftw_mem_model #(.DEPTH(16), .LATENCY(8), .STALL(1'b1)) mem (.clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ftw_t freq_to_ftw(input real f);
    return ftw_t'(longint'(f / FS * 281474976710656.0));
  endfunction

  // ---------------------------------------------------------------- reference models
  // carrier phase: advances by the tuning word in use before each edge
  ftw_t  c_ph, c_ftw;
  ftw_t  c_hist [4];
  // modulation phase: advances by the ftw_m register value before each edge
  logic [31:0] m_ph, m_ftw, m_ftw_reg;
  logic [31:0] m_hist [7];
  sample_t i_prev, q_prev;
  int    since_update = 1000;
  bit    v_bad_near_update = 0;
  bit    model_on = 0;
  longint cycle = 0;
  longint upd_cycle [$];

  always @(posedge clk) begin
    cycle++;
    if (rst_n && ftw_update) begin n_updates++; upd_cycle.push_back(cycle); end
  end

  always @(posedge clk) begin
    #1;
    if (model_on) begin
      real c, s, vr, e;
      logic [31:0] p;
      c_ph = c_ph + c_ftw;
      c_ftw = ftw_current;
      for (int h = 3; h > 0; h--) c_hist[h] = c_hist[h-1];
      c_hist[0] = c_ph;
      m_ph = m_ph + m_ftw;
      m_ftw = m_ftw_reg;
      for (int h = 6; h > 0; h--) m_hist[h] = m_hist[h-1];
      m_hist[0] = m_ph;
      // V after this edge = I, Q after the previous edge times cos/sin of phase 3 edges back
      p  = c_hist[3][47:16];
      c  = 32767.0 * $cos(2.0 * PI * real'(p) / 4294967296.0);
      s  = 32767.0 * $sin(2.0 * PI * real'(p) / 4294967296.0);
      vr = (real'(i_prev) * c + real'(q_prev) * s) / 32768.0;
      if (vr > 32767.0) vr = 32767.0;
      if (vr < -32768.0) vr = -32768.0;
      e  = real'(v_out) - vr; if (e < 0) e = -e;
      checks++;
      if (e > 3.0) begin
        failures++;
        if (since_update < 20) v_bad_near_update = 1;
        if (failures < 10) $display("%0t: V=%0d expected %f", $time, v_out, vr);
      end
      if (since_update == 20 && !v_bad_near_update) n_contin++;
      if (since_update == 0) v_bad_near_update = 0;
      since_update++;
      if (ftw_update) since_update = 0;
    end
    i_prev = i_out;
    q_prev = q_out;
  end

  // ---------------------------------------------------------------- processor tasks
  task automatic wr(input reg_addr_e a, input logic [31:0] d);
    @(posedge clk) #2;
    reg_wr_en = 1; reg_wr_addr = a; reg_wr_data = d;
    if (a == REG_FTW_M) m_ftw_reg = d;   // in use from the edge after the write
    @(posedge clk) #2;
    reg_wr_en = 0;
  endtask

  task automatic run_dma(input int idx, input int count, input int period);
    wr(REG_DMA_ADDR, 32'(idx * 8));
    wr(REG_DMA_COUNT, 32'(count));
    wr(REG_DMA_PERIOD, 32'(period));
    @(posedge clk) #2 trigger = 1;
    repeat (4) @(posedge clk);
    #2 trigger = 0;
  endtask

  // RMS I/Q magnitude and phase errors over n samples (paper's s_RMS and zeta_RMS)
  task automatic measure(input int n, input real xi, input real beta,
                         output real s_rms, output real z_rms, output real mean_i);
    real ss, zz, mi;
    ss = 0; zz = 0; mi = 0;
    for (int k = 0; k < n; k++) begin
      real r, ang, ideal, z;
      @(posedge clk) #3;
      r     = $sqrt(real'(i_out) * real'(i_out) + real'(q_out) * real'(q_out));
      ang   = $atan2(real'(i_out), real'(q_out));
      // I/Q after this edge come from the modulation phase six edges back
      ideal = beta * $sin(2.0 * PI * real'(m_hist[6]) / 4294967296.0);
      z     = (ang - ideal) / beta;
      ss += (r / xi - 1.0) * (r / xi - 1.0);
      zz += z * z;
      mi += real'(i_out);
    end
    s_rms  = $sqrt(ss / n);
    z_rms  = $sqrt(zz / n);
    mean_i = mi / n;
  endtask

  // ---------------------------------------------------------------- sequence
  initial begin
    real s_rms, z_rms, mean_i, xi, beta;
    int  mod_period;
    c_ph = '0; c_ftw = '0; m_ph = '0; m_ftw = '0; m_ftw_reg = '0;
    for (int h = 0; h < 4; h++) c_hist[h] = '0;
    for (int h = 0; h < 7; h++) m_hist[h] = '0;
    i_prev = '0; q_prev = '0;
    for (int k = 0; k < 16; k++) mem.mem[k] = '0;
    mem.mem[0] = 64'(freq_to_ftw(1.5e9));
    mem.mem[1] = 64'(freq_to_ftw(1.0e9));
    mem.mem[2] = 64'(freq_to_ftw(100.0e6));
    for (int k = 0; k < 5; k++) mem.mem[3 + k] = 64'(freq_to_ftw(10.0e6 + 22.5e6 * k));
    xi   = 16384.0 / 32768.0 * 32767.0;
    beta = 8274.0 / 8192.0;
    mod_period = 3146;   // 9.8304 GS/s / 3.125 MHz

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    model_on = 1;

    // 1. QAM parameters: Wm/2pi = 3.125 MHz, beta_m = 1.01 rad, xi = 0.5, no compensation
    wr(REG_FTW_M, 32'(longint'(3.125e6 / FS * 4294967296.0)));
    wr(REG_BETA, 32'd8274);
    wr(REG_XI_I, 32'd16384);
    wr(REG_XI_Q, 32'd16384);
    run_dma(0, 1, PERIOD_380NS);
    reg_rd_addr = REG_STATUS;
    #1 checks++;
    if (reg_rd_data[0] !== dma_busy) begin failures++; $display("status word"); end
    if (dma_busy) n_status++;
    wait (!dma_busy);
    repeat (20) @(posedge clk);
    checks++;
    if (ftw_current !== freq_to_ftw(1.5e9)) begin failures++; $display("carrier not at 1.5 GHz"); end

    // 2. I/Q quality at the nominal setting
    measure(mod_period, xi, beta, s_rms, z_rms, mean_i);
    $display("ideal: s_RMS=%.4f %%  zeta_RMS=%.4f %%  mean I=%.1f", 100*s_rms, 100*z_rms, mean_i);
    checks += 2;
    if (s_rms >= 0.003) begin failures++; $display("RMS magnitude error too large"); end
    if (z_rms >= 0.003) begin failures++; $display("RMS phase error too large"); end

    // 2b. carrier sweep 350 MHz .. 1.75 GHz: output checked sample by sample at each carrier
    for (int k = 0; k < 5; k++) begin
      mem.mem[8] = 64'(freq_to_ftw(350.0e6 + 350.0e6 * k));
      run_dma(8, 1, PERIOD_380NS);
      repeat (20) @(posedge clk);
      wait (!dma_busy);
      measure(mod_period, xi, beta, s_rms, z_rms, mean_i);
      checks++;
      if (ftw_current === freq_to_ftw(350.0e6 + 350.0e6 * k) && s_rms < 0.003 && z_rms < 0.003) n_sweep++;
      else begin failures++; $display("carrier %0d: s_RMS=%f zeta_RMS=%f", k, s_rms, z_rms); end
    end

    // 3. frequency jump 1 GHz -> 100 MHz
    run_dma(1, 1, PERIOD_380NS);
    wait (!dma_busy);
    repeat (500) @(posedge clk);
    run_dma(2, 1, PERIOD_380NS);
    wait (!dma_busy);
    repeat (500) @(posedge clk);
    checks++;
    if (ftw_current === freq_to_ftw(100.0e6)) n_jump++;
    else begin failures++; $display("jump did not reach 100 MHz"); end

    // 4. stepwise ramp 10 -> 100 MHz in five steps, 380 ns apart
    upd_cycle.delete();
    run_dma(3, 5, PERIOD_380NS);
    repeat (1000) @(posedge clk);
    @(posedge clk) #2 trigger = 1;          // ignored: DMA busy
    repeat (4) @(posedge clk);
    #2 trigger = 0;
    wait (!dma_busy);
    repeat (2 * PERIOD_380NS) @(posedge clk);
    checks++;
    if (upd_cycle.size() == 5) n_ignored++;
    else begin failures++; $display("ramp gave %0d updates, expected 5", upd_cycle.size()); end
    for (int k = 1; k < upd_cycle.size(); k++) begin
      checks++;
      if (upd_cycle[k] - upd_cycle[k-1] == 64'(PERIOD_380NS)) n_ramp++;
      else begin failures++; $display("ramp step %0d after %0d cycles", k, upd_cycle[k] - upd_cycle[k-1]); end
    end
    checks++;
    if (ftw_current !== freq_to_ftw(100.0e6)) begin failures++; $display("ramp end FTW wrong"); end

    // 5. injected impairment Delta_I' = -0.3 xi, at the 1.015 GHz carrier of the lock-point test
    mem.mem[8] = 64'(freq_to_ftw(1.015e9));
    run_dma(8, 1, PERIOD_380NS);
    repeat (20) @(posedge clk);             // let the synchronised trigger raise busy
    wait (!dma_busy);
    checks++;
    if (ftw_current !== freq_to_ftw(1.015e9)) begin failures++; $display("1.015 GHz FTW wrong: %h vs %h busy=%0d", ftw_current, freq_to_ftw(1.015e9), dma_busy); end
    wr(REG_DELTA_I, 32'(16'(-16'sd4915)));
    repeat (20) @(posedge clk);
    measure(mod_period, xi, beta, s_rms, z_rms, mean_i);
    $display("Delta_I=-0.3xi: s_RMS=%.4f %%  zeta_RMS=%.4f %%  mean I=%.1f", 100*s_rms, 100*z_rms, mean_i);
    checks += 2;
    if (mean_i > -4915.0 + 60.0 || mean_i < -4915.0 - 60.0) begin failures++; $display("I offset not seen"); end
    else n_offset++;
    if (s_rms <= 0.003) begin failures++; $display("magnitude error did not rise"); end
    wr(REG_DELTA_I, 32'd0);
    wr(REG_PHI, 32'd429);                   // phi' = 3 degrees = 0.0524 rad
    repeat (20) @(posedge clk);
    measure(mod_period, xi, beta, s_rms, z_rms, mean_i);
    $display("phi=3deg: s_RMS=%.4f %%  zeta_RMS=%.4f %%", 100*s_rms, 100*z_rms);
    checks++;
    if (z_rms <= 0.003) begin failures++; $display("phase error did not rise"); end
    wr(REG_PHI, 32'd0);
    repeat (20) @(posedge clk);
    measure(mod_period, xi, beta, s_rms, z_rms, mean_i);
    $display("restored: s_RMS=%.4f %%  zeta_RMS=%.4f %%", 100*s_rms, 100*z_rms);
    checks += 2;
    if (s_rms >= 0.003) begin failures++; $display("not restored (magnitude)"); end
    if (z_rms >= 0.003) begin failures++; $display("not restored (phase)"); end

    // mechanism coverage
    $display("carriers=%0d updates=%0d continuous=%0d jumps=%0d ramp_steps=%0d ignored_triggers=%0d offsets=%0d status=%0d",
             n_sweep, n_updates, n_contin, n_jump, n_ramp, n_ignored, n_offset, n_status);
    checks += 8;
    if (n_sweep   != 5) failures++;
    if (n_updates != 14) begin failures++; $display("expected 14 FTW updates"); end
    if (n_contin  == 0) failures++;
    if (n_jump    == 0) failures++;
    if (n_ramp    != 4) failures++;
    if (n_ignored == 0) failures++;
    if (n_offset  == 0) failures++;
    if (n_status  == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
