// Shared stimulus and checks of the phasemeter_core end-to-end testbenches.
//
// Three-signal test: channel 2 (A, 6 MHz) and channel 3 (B, 9 MHz) carry
// independent frequency wander; channel 0 (C, 15 MHz) carries the sum of
// their phases, so that A + B - C = 0; channel 1 (D) receives the same
// signal as C, a null measurement. All inputs have amplitude 0.2 and a
// little additive noise. The including module defines NOUT (decimated
// outputs to run), FIRST_CHECK (first output checked, after lock), STEP_AT
// (output at which A and C jump by 50 kHz) and RESUME_AT (first output
// checked after that step) and PA_TOL (allowed mean PA(D)-PA(C), in
// 2^-12 cycle; the in-loop truncation noise averages out only over windows
// much longer than the inverse loop bandwidth).
  always #5 clk = ~clk;

  real ph_a, ph_b, ph_c, df_step;
  longint cyc = 0;
  real amp = 0.2;

  // mechanisms exercised, counted
  int n_dec = 0, n_iq = 0, n_lock = 0, n_dither = 0, n_step = 0, n_null = 0, n_combo = 0;

  function automatic real wrap(real v);
    return v - $floor(v + 0.5);
  endfunction

  function automatic logic signed [N-1:0] sample(real ph);
    real noise;
    noise = (real'($urandom % 1024) + real'($urandom % 1024) - 1023.0) * 2.0;
    return N'($rtoi($floor(amp * (2.0 ** N) * $sin(TWO_PI * ph) + noise + 0.5)));
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // stimulus, one new sample per channel per clock
  always @(negedge clk) begin
    real fa, fb;
    cyc++;
    fa = 6.0e6 + df_step + 20.0e3 * $sin(TWO_PI * real'(cyc) / 300000.0);
    fb = 9.0e6 + 15.0e3 * $sin(TWO_PI * real'(cyc) / 170000.0 + 1.0);
    ph_a = ph_a + fa / FS; ph_a = ph_a - $floor(ph_a);
    ph_b = ph_b + fb / FS; ph_b = ph_b - $floor(ph_b);
    ph_c = ph_a + ph_b;    ph_c = ph_c - $floor(ph_c);
    adc_i[0] <= sample(ph_c);
    adc_i[1] <= sample(ph_c);
    adc_i[2] <= sample(ph_a);
    adc_i[3] <= sample(ph_b);
  end

  // dithered frequency truncation: the PIR of channel A takes more than one
  // value while the input frequency is constant to within a PIR step
  logic [T-1:0] pir_prev;
  always @(posedge clk) begin
    if (rst_n && cyc > 40000 && pir_o[2] != pir_prev) n_dither++;
    pir_prev <= pir_o[2];
  end

  real pir_n [NC];
  real q_n [NC], i_n [NC];
  int  kout = 0;

  always @(posedge clk) begin
    if (rst_n && dec_valid) begin
      n_dec++;
      kout++;
      for (int c = 0; c < NC; c++) begin
        pir_n[c] = real'(dec_pir_o[c]) / (2.0 ** (ORDER * RL));            // mean PIR
      end
      if ((kout >= FIRST_CHECK && kout < STEP_AT) || kout >= RESUME_AT) begin
        real combo, nullf, padm;
        combo = pir_n[2] + pir_n[3] - pir_n[0];
        nullf = pir_n[0] - pir_n[1];
        padm  = real'(dec_padiff_o[0]) / (2.0 ** (ORDER * RL));           // mean of PA(D)-PA(C)
        check(combo < 0.1 && combo > -0.1, $sformatf("A+B-C = %f PIR LSB at output %0d", combo, kout));
        check(nullf < 0.1 && nullf > -0.1, $sformatf("C-D = %f PIR LSB at output %0d", nullf, kout));
        check(padm < PA_TOL && padm > -PA_TOL, $sformatf("PA(D)-PA(C) mean %f at output %0d", padm, kout));
        check(pir_n[0] > 768.0 - 2.0 && pir_n[0] < 768.0 + 2.0 + df_step / FS * 4096.0,
              $sformatf("channel C mean PIR %f", pir_n[0]));
        if (combo < 0.1 && combo > -0.1) n_combo++;
        if (padm < PA_TOL && padm > -PA_TOL) n_null++;
        if (kout >= RESUME_AT) n_step++;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && iq_done) begin
      n_iq++;
      if ((kout >= FIRST_CHECK && kout < STEP_AT) || kout >= RESUME_AT) begin
        for (int c = 0; c < NC; c++) begin
          real m, p;
          m = real'(iq_mag_o[c]) / (2.0 ** IQW);
          p = real'(iq_phase_o[c]) / (2.0 ** PH);
          check(m > amp / 4.0 * 0.95 && m < amp / 4.0 * 1.05,
                $sformatf("channel %0d amplitude %f, expected %f", c, m, amp / 4.0));
          check(p < 0.01 && p > -0.01, $sformatf("channel %0d residual phase %f cycle", c, p));
          if (m > amp / 4.0 * 0.95 && p < 0.01 && p > -0.01) n_lock++;
        end
      end
    end
  end

  initial begin
    ph_a = 0.0; ph_b = 0.3; ph_c = 0.3; df_step = 0.0;
    for (int c = 0; c < NC; c++) begin
      adc_i[c] = '0; kp[c] = 16'd655; ki[c] = 16'd105;
    end
    f_off[0] = 12'd768; f_off[1] = 12'd768; f_off[2] = 12'd307; f_off[3] = 12'd461;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    if (STEP_AT < NOUT) begin
      wait (kout == STEP_AT);
      df_step = 50.0e3;     // 50 kHz jump of A, and so of C
    end
    wait (kout == NOUT);
    repeat (CORDIC_WAIT) @(posedge clk);
    $display("mechanisms: decimated outputs %0d, IQ readouts %0d, channel locks %0d, PIR dither steps %0d, A+B-C passes %0d, PA null passes %0d, checks after frequency step %0d",
             n_dec, n_iq, n_lock, n_dither, n_combo, n_null, n_step);
    check(n_dec > 0, "no decimated output");
    check(n_iq > 0, "no IQ readout");
    check(n_lock > 0, "no channel lock");
    check(n_dither > 0, "PIR never dithered");
    check(n_combo > 0, "no three-signal combination");
    check(n_null > 0, "no PA null measurement");
    if (STEP_AT < NOUT) check(n_step > 0, "no check after the frequency step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat ((NOUT + 3) * (2 ** RL) + 100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
