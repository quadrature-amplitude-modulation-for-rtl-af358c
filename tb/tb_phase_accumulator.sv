// tb_phase_accumulator -- self-checking test of the phase accumulator.
// Drives random tuning words and clock enables for 2000 cycles and compares the phase with
// an independent modulo-2^32 sum kept in the testbench; also checks the synchronous reset.
module tb_phase_accumulator;
  localparam int unsigned W = 32;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] ftw = '0, phase;
  int checks = 0, failures = 0;
  longint unsigned model;

  phase_accumulator dut (.clk, .rst_n, .en, .ftw, .phase);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 checks++; if (phase !== '0) begin failures++; $display("reset: phase=%h", phase); end
    rst_n = 1;
    model = 0;
    for (int n = 0; n < 2000; n++) begin
      ftw = (n < 1000) ? $urandom : W'(n);
      en  = ($urandom % 4) != 0;
      @(posedge clk);
      if (en) model = (model + ftw) & 64'hFFFF_FFFF;
      #1;
      checks++;
      if (phase !== W'(model)) begin
        failures++;
        if (failures < 10) $display("cycle %0d: phase=%h expected %h", n, phase, W'(model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
