// tb_phasemeter_core -- end-to-end test of the phasemeter core with the
// decimation reduced to 2^10 so that many decimated outputs fit in a short
// run: lock acquisition on four channels, the three-signal combination
// A+B-C and the C-D null from the decimated PIR, the PA-difference null,
// amplitude and residual phase from the IQ readout, the dithered PIR, and
// re-lock after a 50 kHz frequency step. Loop gains kp = 655, ki = 105 give
// about 40 kHz bandwidth at amplitude 0.2.
module tb_phasemeter_core;
  localparam int RL = 10;
  localparam int NOUT = 80, FIRST_CHECK = 35, STEP_AT = 45, RESUME_AT = 70;
  localparam int CORDIC_WAIT = 30;
  localparam real PA_TOL = 40.0;   // a 13 us window is inside the loop bandwidth
`include "tb_pm_signals.svh"

  phasemeter_core #(.RLOG2(RL)) dut (
    .clk, .rst_n, .adc_i, .f_off, .kp, .ki,
    .pir_o, .pa_o, .q_o, .i_o, .padiff_o, .sat_o,
    .dec_valid, .dec_pir_o, .dec_i_o, .dec_q_o, .dec_padiff_o,
    .iq_done, .iq_phase_o, .iq_mag_o
  );

`include "tb_pm_stimulus.svh"
endmodule
