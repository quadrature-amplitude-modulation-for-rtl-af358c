// tb_nco -- self-checking test of the carrier NCO.
// Sample rate is taken as the device's 9.8304 GS/s. The NCO runs at 1 GHz, jumps to
// 100 MHz, then steps through random tuning words with updates at random times. A
// testbench phase model (never reset on updates) predicts cos and sin, two cycles behind the
// phase; each output must match 32767*cos/sin of that phase to 1.5 LSB, which also proves
// every update phase-continuous. The tuning-word readback is checked too.
module tb_nco;
  import esb_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam real FS = 9.8304e9;
  logic clk = 0, rst_n = 0, ftw_valid = 0;
  ftw_t ftw_in = '0, ftw;
  sample_t cos_out, sin_out;
  int checks = 0, failures = 0, updates = 0;

  nco dut (.clk, .rst_n, .ftw_valid, .ftw_in, .ftw, .cos_out, .sin_out);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ftw_t freq_to_ftw(input real f);
    return ftw_t'(longint'(f / FS * 281474976710656.0));
  endfunction

  ftw_t m_phase, m_ftw;
  ftw_t ph_hist [3];

  task automatic check_outputs();
    real c, s, ec, es;
    logic [31:0] p;
    p  = ph_hist[2][47:16];
    c  = 32767.0 * $cos(2.0 * PI * real'(p) / 4294967296.0);
    s  = 32767.0 * $sin(2.0 * PI * real'(p) / 4294967296.0);
    ec = real'(cos_out) - c; if (ec < 0) ec = -ec;
    es = real'(sin_out) - s; if (es < 0) es = -es;
    checks += 2;
    if (ec > 1.5 || es > 1.5) begin
      failures++;
      if (failures < 10) $display("%0t: cos=%0d (%f) sin=%0d (%f)", $time, cos_out, c, sin_out, s);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    m_phase = '0; m_ftw = '0;
    ph_hist[0] = '0; ph_hist[1] = '0; ph_hist[2] = '0;
    for (int n = 0; n < 6000; n++) begin
      ftw_t nxt;
      ftw_valid = 1'b0;
      if (n == 0)                          begin ftw_valid = 1'b1; ftw_in = freq_to_ftw(1.0e9); end
      else if (n == 1000)                  begin ftw_valid = 1'b1; ftw_in = freq_to_ftw(100.0e6); end
      else if (n > 2000 && $urandom % 97 == 0) begin ftw_valid = 1'b1; ftw_in = {$urandom, $urandom} >> 17; end
      @(posedge clk);
      // model: phase advances by the word in use before this edge
      nxt = m_phase + m_ftw;
      if (ftw_valid) begin m_ftw = ftw_in; updates++; end
      m_phase = nxt;
      ph_hist[2] = ph_hist[1]; ph_hist[1] = ph_hist[0]; ph_hist[0] = m_phase;
      #1;
      checks++;
      if (ftw !== m_ftw) begin failures++; $display("ftw readback %h expected %h", ftw, m_ftw); end
      if (n >= 3) check_outputs();
    end
    checks++;
    if (updates < 10) begin failures++; $display("only %0d updates", updates); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
