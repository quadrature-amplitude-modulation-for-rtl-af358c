// tb_qam_modulator -- self-checking test of the I/Q up-converter.
// Random and corner-case I, Q, cos and sin samples, one set per clock; each output, one
// cycle later, must equal round((I*cos + Q*sin) / 2^15) saturated to 16 bits, computed in
// the testbench with 64-bit integers. Also checks that a pure-cosine carrier with Q = 0
// passes I through, and that extreme inputs saturate rather than wrap.
module tb_qam_modulator;
  import esb_pkg::*;
  logic clk = 0;
  sample_t i_in = '0, q_in = '0, cos_in = '0, sin_in = '0, v_out;
  int checks = 0, failures = 0, saturated = 0;
  longint expv;

  qam_modulator dut (.clk, .i_in, .q_in, .cos_in, .sin_in, .v_out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model(input sample_t i, q, c, s);
    longint acc;
    acc = (longint'(i) * longint'(c) + longint'(q) * longint'(s) + 16384) >>> 15;
    if (acc > 32767)  acc = 32767;
    if (acc < -32768) acc = -32768;
    return acc;
  endfunction

  initial begin
    for (int n = 0; n < 5000; n++) begin
      case (n % 5)
        0: begin i_in = $urandom; q_in = $urandom; cos_in = $urandom; sin_in = $urandom; end
        1: begin i_in = $urandom; q_in = 0; cos_in = 16'sd32767; sin_in = $urandom; end
        2: begin i_in = -16'sd32768; q_in = -16'sd32768; cos_in = -16'sd32768; sin_in = -16'sd32768; end
        3: begin i_in = 16'sd32767; q_in = 16'sd32767; cos_in = -16'sd32768; sin_in = -16'sd32768; end
        default: begin i_in = $urandom % 2000; q_in = -($urandom % 2000); cos_in = $urandom; sin_in = $urandom; end
      endcase
      expv = model(i_in, q_in, cos_in, sin_in);
      if (expv == 32767 || expv == -32768) saturated++;
      @(posedge clk);
      #1;
      checks++;
      if (longint'(v_out) != expv) begin
        failures++;
        if (failures < 10) $display("I=%0d Q=%0d c=%0d s=%0d: V=%0d expected %0d", i_in, q_in, cos_in, sin_in, v_out, expv);
      end
    end
    checks++;
    if (saturated == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
