// tb_phasemeter_full -- the end-to-end three-signal test of tb_phasemeter_core
// with every parameter of the core at its default, i.e. decimation by 2^24
// from 80 MHz to 4.77 Hz. It runs to the third decimated output (about
// 50 million clocks), the first whose filter window lies wholly after reset,
// and checks A+B-C, the C-D null, the PA-difference null and the IQ
// amplitude and residual phase on it.
module tb_phasemeter_full;
  localparam int RL = 24;
  localparam int NOUT = 3, FIRST_CHECK = 3, STEP_AT = 1000, RESUME_AT = 1000;
  localparam int CORDIC_WAIT = 30;
  localparam real PA_TOL = 4.0;
`include "tb_pm_signals.svh"

  phasemeter_core dut (
    .clk, .rst_n, .adc_i, .f_off, .kp, .ki,
    .pir_o, .pa_o, .q_o, .i_o, .padiff_o, .sat_o,
    .dec_valid, .dec_pir_o, .dec_i_o, .dec_q_o, .dec_padiff_o,
    .iq_done, .iq_phase_o, .iq_mag_o
  );

`include "tb_pm_stimulus.svh"
endmodule
