// adpll_channel -- one all-digital phase-locked loop tracking channel.
//
// The loop is the published phasemeter topology:
//   input i[n] (N bits) x NCO cosine --pd_mixer--> Q, phase error (K bits)
//   Q --lpf_2f--> u_d (K+F) --pi_servo (2^-C gain, PI)--> u_f (K+F+C)
//   u_f --pir_reg (dithered truncation to T bits, + f_off)--> PIR
//   PIR --nco (phase accumulator, truncation to M bits, LUT)--> sine/cosine
// A second mixer multiplies the input with the NCO sine; after its own 2f
// filter it gives I = A/4, the amplitude readout. Each of the four in-loop
// truncations (Q mixer, I mixer, u_f, phase) gets its own triangular dither
// generator, seeded from the parameter CH so that channels are independent.
//
// Readouts, all at the full sample rate: q_o (Q before the 2f filter, the
// readout point of the loop model), i_o (I after its filter), u_d_o (Q after
// the filter), pir_o (frequency, cycles/sample * 2^T), pa_o (phase, cycles
// * 2^T) and u_f_o. sat_o flags a servo saturation.
//
// Loop gain: the open-loop gain is A*pi/2 * kp * 2^-C per sample at high
// frequency, so the unity-gain frequency is about A*pi/2*kp*2^-C*fs/(2*pi).
// Example: A = 1/4, kp = 524, C = 16 gives about 40 kHz, the optimal
// bandwidth of the published analysis; ki = 84 (2^-8 units) puts the PI zero
// near 8 kHz. The loop delay is 11 clocks (mixer 2, filter 2, servo 1,
// PIR 2, PA 1, rounding 1, LUT 1, plus the input sample register).
module adpll_channel #(
  parameter int unsigned N        = pm_pkg::N_ADC,
  parameter int unsigned M        = pm_pkg::M_LUT,
  parameter int unsigned K        = pm_pkg::K_PD,
  parameter int unsigned F        = pm_pkg::F_LF,
  parameter int unsigned C        = pm_pkg::C_GAIN,
  parameter int unsigned T        = pm_pkg::T_FREQ,
  parameter int unsigned KW       = pm_pkg::KAPPA_W,
  parameter int unsigned KI_SHIFT = pm_pkg::KI_SHIFT,
  parameter int unsigned ALPHA    = pm_pkg::LPF_ALPHA,
  parameter int unsigned CH       = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [N-1:0]     adc_i,
  input  logic [T-1:0]            f_off,
  input  logic [KW-1:0]           kp,
  input  logic [KW-1:0]           ki,
  output logic signed [K-1:0]     q_o,
  output logic signed [K+F-1:0]   i_o,
  output logic signed [K+F-1:0]   u_d_o,
  output logic signed [K+F+C-1:0] u_f_o,
  output logic [T-1:0]            pir_o,
  output logic [T-1:0]            pa_o,
  output logic                    sat_o
);

  localparam int unsigned TW = pm_pkg::TRI_W;
  localparam int unsigned W  = K + F + C;

  // dither sources: index 0 Q mixer, 1 I mixer, 2 frequency, 3 phase
  logic signed [TW-1:0] dith [4];
  logic                 tie  [4];

  for (genvar g = 0; g < 4; g++) begin : g_dither
    localparam logic [40:0] SA = 41'h0_9E37_79B9_7 ^ 41'(CH * 4 + g + 1) * 41'd2654435761;
    localparam logic [46:0] SB = 47'h0_5851_F42D_4C9 ^ 47'(CH * 4 + g + 1) * 47'd40503;
    dither_gen #(.DW(TW - 1), .SEED_A(SA), .SEED_B(SB)) u_dith (
      .clk, .rst_n, .tri_o(dith[g]), .tie_o(tie[g])
    );
  end

  logic signed [N-1:0]  adc_q;
  logic signed [M-1:0]  lo_sin, lo_cos;
  logic signed [K-1:0]  q_mix, i_mix;
  logic signed [K+F-1:0] u_d, i_filt;
  logic signed [W-1:0]  u_f;
  logic [T-1:0]         pir;

  // input sample register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) adc_q <= '0;
    else        adc_q <= adc_i;
  end

  pd_mixer #(.N(N), .M(M), .K(K), .TW(TW)) u_mix_q (
    .clk, .rst_n, .sig_i(adc_q), .lo_i(lo_cos), .dither(dith[0]), .tie(tie[0]), .mix_o(q_mix)
  );
  pd_mixer #(.N(N), .M(M), .K(K), .TW(TW)) u_mix_i (
    .clk, .rst_n, .sig_i(adc_q), .lo_i(lo_sin), .dither(dith[1]), .tie(tie[1]), .mix_o(i_mix)
  );

  lpf_2f #(.K(K), .F(F), .ALPHA(ALPHA)) u_lpf_q (.clk, .rst_n, .x_i(q_mix), .y_o(u_d));
  lpf_2f #(.K(K), .F(F), .ALPHA(ALPHA)) u_lpf_i (.clk, .rst_n, .x_i(i_mix), .y_o(i_filt));

  pi_servo #(.K(K), .F(F), .C(C), .KW(KW), .KI_SHIFT(KI_SHIFT)) u_pi (
    .clk, .rst_n, .u_d_i(u_d), .kp, .ki, .u_f_o(u_f), .sat_o
  );

  pir_reg #(.W(W), .T(T), .TW(TW)) u_pir (
    .clk, .rst_n, .u_f_i(u_f), .f_off, .dither(dith[2]), .tie(tie[2]), .pir_o(pir)
  );

  nco #(.T(T), .M(M), .TW(TW)) u_nco (
    .clk, .rst_n, .pir, .dither(dith[3]), .tie(tie[3]), .pa_o, .sin_o(lo_sin), .cos_o(lo_cos)
  );

  assign q_o   = q_mix;
  assign i_o   = i_filt;
  assign u_d_o = u_d;
  assign u_f_o = u_f;
  assign pir_o = pir;

endmodule
