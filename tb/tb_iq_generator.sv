// tb_iq_generator -- self-checking test of the baseband I/Q generator.
// The testbench keeps its own copy of the modulation phase and computes, in real
// arithmetic, I = xi_I sin(beta sin(phase)) + Delta_I and
// Q = xi_Q cos(beta sin(phase) + phi) + Delta_Q, saturated to 16 bits, for the phase six
// cycles before each output (pipeline latency of the generator after its phase register).
// Four settings are run: ideal (beta = 1.01 rad, xi_I = xi_Q), ideal with a constant-envelope
// check I^2 + Q^2 = xi^2, impaired (gain imbalance, phi' = 5 degrees, Delta_I' = -0.3 xi,
// Delta_Q'), and a large index with saturation. Allowed error 2 + 2.5*beta LSB per sample: one LSB of error in
// sin(Wm t) moves theta by beta/32767 rad, i.e. beta LSB at the output.
module tb_iq_generator;
  import esb_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int  LAT = 6;
  logic clk = 0, rst_n = 0;
  iq_params_t p;
  sample_t i_out, q_out;
  int checks = 0, failures = 0;

  iq_generator dut (.clk, .rst_n, .p, .i_out, .q_out);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sat(input real x);
    if (x > 32767.0)  return 32767.0;
    if (x < -32768.0) return -32768.0;
    return x;
  endfunction

  logic [31:0] ph;
  logic [31:0] hist [LAT+1];

  task automatic run_case(input string name, input int n, input bit envelope);
    real beta, phi, xi_i, xi_q, th, ei, eq, ri, rq, worst_env, tol;
    beta = real'(p.beta) / 8192.0;
    tol  = 2.0 + 2.5 * beta;  // 1-LSB errors in sin(Wm t) become beta-LSB errors downstream
    phi  = real'(p.phi) / 8192.0;
    xi_i = real'(p.xi_i) / 32768.0 * 32767.0;
    xi_q = real'(p.xi_q) / 32768.0 * 32767.0;
    worst_env = 0.0;
    for (int k = 0; k < n; k++) begin
      @(posedge clk);
      ph = ph + p.ftw_m;
      for (int h = LAT; h > 0; h--) hist[h] = hist[h-1];
      hist[0] = ph;
      #1;
      if (k < LAT + 2) continue;  // settings still flowing through the pipeline
      th = beta * $sin(2.0 * PI * real'(hist[LAT]) / 4294967296.0);
      ri = sat(xi_i * $sin(th) + real'(p.delta_i));
      rq = sat(xi_q * $cos(th + phi) + real'(p.delta_q));
      ei = real'(i_out) - ri; if (ei < 0) ei = -ei;
      eq = real'(q_out) - rq; if (eq < 0) eq = -eq;
      checks += 2;
      if (ei > tol || eq > tol) begin
        failures++;
        if (failures < 10) $display("%s: I=%0d (%f) Q=%0d (%f)", name, i_out, ri, q_out, rq);
      end
      if (envelope) begin
        real r, e;
        r = $sqrt(real'(i_out) * real'(i_out) + real'(q_out) * real'(q_out));
        e = r / xi_i - 1.0; if (e < 0) e = -e;
        if (e > worst_env) worst_env = e;
      end
    end
    if (envelope) begin
      checks++;
      $display("%s: worst envelope error %f %%", name, 100.0 * worst_env);
      if (worst_env > 0.001) begin failures++; $display("envelope not constant"); end
    end
  endtask

  initial begin
    p = '0;
    p.ftw_m = 32'd8589935;         // 2^32 / 500: one modulation period every 500 samples
    ph = '0;
    for (int h = 0; h <= LAT; h++) hist[h] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // ideal, beta_opt = 1.01 rad, xi = 0.5
    p.beta = 16'd8274; p.xi_i = 16'd16384; p.xi_q = 16'd16384;
    run_case("ideal", 1500, 1'b1);
    // impaired: gain imbalance, phi' = 5 deg, Delta_I' = -0.3 xi, Delta_Q' = +100
    p.xi_i = 16'd18000; p.xi_q = 16'd15000; p.phi = 16'sd715;
    p.delta_i = -16'sd4915; p.delta_q = 16'sd100;
    run_case("impaired", 1500, 1'b0);
    // negative phi', faster modulation
    p.phi = -16'sd2000; p.ftw_m = 32'd42949673;
    run_case("neg_phi", 1000, 1'b0);
    // large index and full scale with offsets: saturation
    p.beta = 16'd24576; p.xi_i = 16'd32768; p.xi_q = 16'd32768; p.phi = '0;
    p.delta_i = 16'sd3000; p.delta_q = -16'sd3000;
    run_case("saturate", 1000, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
