// Shared declarations of the phasemeter_core end-to-end testbenches.
// The including module defines RL (log2 of the decimation factor in use).
  localparam int NC = 4, N = 16, K = 18, F = 8, T = 12, KW = 16, PH = 24, IQW = 32, ORDER = 3;
  localparam int DW_PIR = T + 1 + ORDER * RL;
  localparam int DW_IQ  = K + F + ORDER * RL;
  localparam int DW_PA  = T + ORDER * RL;
  localparam real FS = 80.0e6;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [N-1:0]      adc_i [NC];
  logic [T-1:0]             f_off [NC];
  logic [KW-1:0]            kp [NC], ki [NC];
  logic [T-1:0]             pir_o [NC], pa_o [NC];
  logic signed [K-1:0]      q_o [NC];
  logic signed [K+F-1:0]    i_o [NC];
  logic signed [T-1:0]      padiff_o [NC-1];
  logic                     sat_o [NC];
  logic                     dec_valid, iq_done;
  logic signed [DW_PIR-1:0] dec_pir_o [NC];
  logic signed [DW_IQ-1:0]  dec_i_o [NC], dec_q_o [NC];
  logic signed [DW_PA-1:0]  dec_padiff_o [NC-1];
  logic signed [PH-1:0]     iq_phase_o [NC];
  logic [IQW-1:0]           iq_mag_o [NC];
  int checks = 0, failures = 0;
