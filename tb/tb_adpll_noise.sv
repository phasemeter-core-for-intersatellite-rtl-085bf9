// tb_adpll_noise -- one ADPLL channel tracking a weak beat note in noise.
//
// The input is a 6 MHz tone of amplitude A = 0.1 with near-Gaussian additive
// noise of standard deviation 0.08 (sum of four uniform variables), which is
// about -1 dB signal-to-noise per sample, 75 dB-Hz carrier-to-noise density
// at 80 MHz sampling. The gains are raised for the smaller amplitude
// (kp = 1310, ki = 210) to keep the bandwidth near 40 kHz. After acquisition
// the test runs 200 000 samples and checks that the loop never slips a
// cycle (peak-to-peak tracking error below half a cycle), that the
// mean PIR is the input frequency and that the I readout gives A/4.
module tb_adpll_noise;
  localparam int N = 16, M = 10, K = 18, F = 8, C = 16, T = 12, KW = 16;
  localparam real FS = 80.0e6;
  localparam real TWO_PI = 6.283185307179586;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [N-1:0] adc_i;
  logic [T-1:0] f_off;
  logic [KW-1:0] kp, ki;
  logic signed [K-1:0] q_o;
  logic signed [K+F-1:0] i_o, u_d_o;
  logic signed [K+F+C-1:0] u_f_o;
  logic [T-1:0] pir_o, pa_o;
  logic sat_o;
  int checks = 0, failures = 0;

  adpll_channel dut (.clk, .rst_n, .adc_i, .f_off, .kp, .ki, .q_o, .i_o, .u_d_o, .u_f_o,
                     .pir_o, .pa_o, .sat_o);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real f_in;      // input frequency, Hz
  real ph_in;     // input phase, cycles (unwrapped fraction)
  real amp;

  // near-Gaussian noise, standard deviation SIGMA
  localparam real SIGMA = 0.08;
  function automatic real noise();
    real u;
    u = 0.0;
    for (int j = 0; j < 4; j++) u += real'($urandom) / 4294967296.0 - 0.5;
    return u * SIGMA * 1.7320508;
  endfunction

  // ADC with clipping at full scale
  function automatic logic signed [N-1:0] sample(real v);
    real c;
    c = $floor(v * (2.0 ** N) + 0.5);
    if (c > 32767.0) c = 32767.0;
    if (c < -32768.0) c = -32768.0;
    return N'($rtoi(c));
  endfunction

  function automatic real wrap(real v);
    return v - $floor(v + 0.5);
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // run n samples; return mean PIR, mean and spread of (input phase - PA)
  task automatic run(int n, output real pir_mean, output real err_mean, output real err_pp,
                     output real ud_max, output real i_mean);
    real e, e0, emin, emax;
    pir_mean = 0.0; err_mean = 0.0; ud_max = 0.0; i_mean = 0.0;
    emin = 1.0; emax = -1.0; e0 = 0.0;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      ph_in = ph_in + f_in / FS + 2.0e-6 * $sin(TWO_PI * k / 50000.0);
      ph_in = ph_in - $floor(ph_in);
      adc_i = sample(amp * $sin(TWO_PI * ph_in) + noise());
      pir_mean += real'(pir_o);
      e = wrap(ph_in - real'(pa_o) / (2.0 ** T));
      if (k == 0) e0 = e;
      e = wrap(e - e0);
      err_mean += e;
      if (e < emin) emin = e;
      if (e > emax) emax = e;
      if (real'(u_d_o) > ud_max) ud_max = real'(u_d_o);
      if (-real'(u_d_o) > ud_max) ud_max = -real'(u_d_o);
      i_mean += real'(i_o);
    end
    pir_mean = pir_mean / n;
    err_mean = err_mean / n + e0;
    err_pp = emax - emin;
    ud_max = ud_max / (2.0 ** (K + F));
    i_mean = i_mean / n / (2.0 ** (K + F));
  endtask

  initial begin
    real pm, em, epp, udm, im;
    adc_i = '0; kp = 16'd1310; ki = 16'd210; amp = 0.1;
    f_in = 6.0e6; ph_in = 0.0; f_off = 12'd307;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    run(30000, pm, em, epp, udm, im);
    run(200000, pm, em, epp, udm, im);
    $display("noisy input: PIR mean %f (exp %f), phase error p-p %f cyc, I %f (exp %f)",
             pm, f_in / FS * 4096.0, epp, im, amp / 4.0);
    check(epp < 0.5, "no cycle slip: tracking error spread below half a cycle");
    check(pm > f_in / FS * 4096.0 - 0.05 && pm < f_in / FS * 4096.0 + 0.05, "mean PIR in noise");
    check(im > amp / 4.0 * 0.9 && im < amp / 4.0 * 1.1, "I readout equals A/4 in noise");
    check(sat_o == 1'b0, "no servo saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
