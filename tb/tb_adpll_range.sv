// tb_adpll_range -- one ADPLL channel at the edges of the beat-note band.
//
// The intersatellite beat note moves between about 2 MHz and 25 MHz over an
// orbit. This test resets the channel and locks it at 2 MHz, where the 2f
// term (4 MHz) is closest to the 300 kHz filter corner, and at 25 MHz, where
// the 2f term (50 MHz) aliases to 30 MHz. At each frequency the preset is
// one PIR code (19.5 kHz) away from the input. After acquisition it checks
// the mean PIR against f/fs*2^12, the phase tracking spread, the filtered Q,
// the I readout (A/4) and the absence of servo saturation. Gains and
// amplitude are those of the 6 MHz channel test (A = 1/4, kp = 524, ki = 84).
module tb_adpll_range;
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
      adc_i = N'($rtoi($floor(amp * (2.0 ** N) * $sin(TWO_PI * ph_in) + 0.5)));
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
    real freqs[2];
    int unsigned presets[2];
    freqs[0] = 2.0e6;  presets[0] = 103;    // 2 MHz = 102.4 codes
    freqs[1] = 25.0e6; presets[1] = 1279;   // 25 MHz = 1280 codes
    adc_i = '0; kp = 16'd524; ki = 16'd84; amp = 0.25;
    for (int j = 0; j < 2; j++) begin
      @(negedge clk);
      rst_n = 1'b0;
      f_in = freqs[j]; ph_in = 0.0; f_off = T'(presets[j]);
      repeat (3) @(posedge clk);
      @(negedge clk);
      rst_n = 1'b1;
      run(30000, pm, em, epp, udm, im);
      run(16384, pm, em, epp, udm, im);
      $display("%0.1f MHz: PIR mean %f (exp %f), phase error p-p %f cyc, |u_d| max %f, I %f",
               f_in / 1.0e6, pm, f_in / FS * 4096.0, epp, udm, im);
      check(pm > f_in / FS * 4096.0 - 0.02 && pm < f_in / FS * 4096.0 + 0.02, "mean PIR after lock");
      check(epp < 0.02, "phase tracking error spread after lock");
      check(udm < 0.25 / 4.0 * 0.05, "filtered Q stays near zero");
      check(im > 0.25 / 4.0 * 0.95 && im < 0.25 / 4.0 * 1.02, "I readout equals A/4");
      check(sat_o == 1'b0, "no servo saturation while locked");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
