// tb_sin_lut_interp -- self-checking test of the interpolating sine look-up table.
// Feeds table-boundary, quarter-turn and random phases, one per clock, and compares each
// output, two cycles later, with 32767*sin(2*pi*phase/2^32) computed in real arithmetic.
// Allowed error: 1.5 LSB (table rounding, interpolation rounding and curvature).
module tb_sin_lut_interp;
  import esb_pkg::*;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0;
  logic [31:0] phase = '0;
  sample_t y;
  int checks = 0, failures = 0;
  logic [31:0] hist [3];

  sin_lut_interp dut (.clk, .phase, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ref_sin(input logic [31:0] p);
    return 32767.0 * $sin(2.0 * PI * real'(p) / 4294967296.0);
  endfunction

  initial begin
    int worst;
    worst = 0;
    for (int n = 0; n < 4000; n++) begin
      if (n < 8)        phase = 32'(n) << 30;            // 0, 1/4, 1/2, 3/4 turn
      else if (n < 40)  phase = 32'hFFFF_FFFF - 32'(n);   // wrap at end of table
      else if (n < 200) phase = (32'(n) << 22) + 32'h0020_0000; // midway between entries
      else              phase = $urandom;
      hist[0] = phase;
      @(posedge clk);
      hist[2] = hist[1];
      hist[1] = hist[0];
      #1;
      if (n >= 2) begin
        real e;
        e = real'(y) - ref_sin(hist[2]);
        if (e < 0) e = -e;
        checks++;
        if ($rtoi(e) > worst) worst = $rtoi(e);
        if (e > 1.5) begin
          failures++;
          if (failures < 10) $display("phase=%h y=%0d ref=%f", hist[2], y, ref_sin(hist[2]));
        end
      end
    end
    $display("worst error %0d LSB", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
