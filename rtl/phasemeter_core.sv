// phasemeter_core -- multi-channel phasemeter core for heterodyne laser
// interferometry.
//
// NC independent ADPLL channels (adpll_channel) each lock an NCO to the beat
// note on their ADC input and deliver its frequency (PIR), phase (PA),
// quadrature error (Q) and amplitude (I) at the full sample rate. The
// readout side decimates, per channel, the PIR, I and Q and, between
// channels, the phase accumulator differences PA[k]-PA[0] (pa_diff), each
// with a CIC filter (cic_decimator) from the sample rate to fs/2^RLOG2.
// The decimated I and Q of every channel feed a CORDIC (iq_readout) that
// returns the residual phase atan2(Q, I) and the amplitude sqrt(I^2+Q^2).
// The ADCs are outside the core; their samples arrive on adc_i.
//
// The loop structure, widths T and the sample-rate-dependent choices of the
// 2f filter follow the published design; the channel count (four, as on the
// prototype used for the analog test), CIC order and rate, the Q readout
// being scaled by 2^F to match the filtered I, and all port encodings are
// this implementation's choices.
//
// Timing: all readouts at full rate are registered. The CIC outputs update
// together, with dec_valid high for one clock every 2^RLOG2 clocks; iq_done
// pulses CORDIC_ITER+2 clocks after each dec_valid. f_off, kp and ki may
// change at any time and act within a few clocks.
module phasemeter_core #(
  parameter int unsigned NC    = pm_pkg::NCH,
  parameter int unsigned N     = pm_pkg::N_ADC,
  parameter int unsigned M     = pm_pkg::M_LUT,
  parameter int unsigned K     = pm_pkg::K_PD,
  parameter int unsigned F     = pm_pkg::F_LF,
  parameter int unsigned C     = pm_pkg::C_GAIN,
  parameter int unsigned T     = pm_pkg::T_FREQ,
  parameter int unsigned KW    = pm_pkg::KAPPA_W,
  parameter int unsigned ORDER = pm_pkg::CIC_ORDER,
  parameter int unsigned RLOG2 = pm_pkg::CIC_RLOG2,
  parameter int unsigned IQW   = pm_pkg::IQ_W,
  parameter int unsigned PH    = pm_pkg::PH_W,
  // derived widths of the decimated readouts
  parameter int unsigned DW_PIR = T + 1 + ORDER * RLOG2,
  parameter int unsigned DW_IQ  = K + F + ORDER * RLOG2,
  parameter int unsigned DW_PA  = T + ORDER * RLOG2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // ADC samples and loop settings, per channel
  input  logic signed [N-1:0]     adc_i      [NC],
  input  logic [T-1:0]            f_off      [NC],
  input  logic [KW-1:0]           kp         [NC],
  input  logic [KW-1:0]           ki         [NC],
  // full-rate readouts
  output logic [T-1:0]            pir_o      [NC],
  output logic [T-1:0]            pa_o       [NC],
  output logic signed [K-1:0]     q_o        [NC],
  output logic signed [K+F-1:0]   i_o        [NC],
  output logic signed [T-1:0]     padiff_o   [NC-1],
  output logic                    sat_o      [NC],
  // decimated readouts
  output logic                    dec_valid,
  output logic signed [DW_PIR-1:0] dec_pir_o [NC],
  output logic signed [DW_IQ-1:0]  dec_i_o   [NC],
  output logic signed [DW_IQ-1:0]  dec_q_o   [NC],
  output logic signed [DW_PA-1:0]  dec_padiff_o [NC-1],
  // IQ readout of the decimated I and Q
  output logic                    iq_done,
  output logic signed [PH-1:0]    iq_phase_o [NC],
  output logic [IQW-1:0]          iq_mag_o   [NC]
);

  logic [NC-1:0] v_pir, v_i, v_q, v_iq_done;
  logic [NC-2:0] v_pa;

  for (genvar c = 0; c < int'(NC); c++) begin : g_ch
    logic signed [K+F-1:0]   u_d_unused;
    logic signed [K+F+C-1:0] u_f_unused;

    adpll_channel #(.N(N), .M(M), .K(K), .F(F), .C(C), .T(T), .KW(KW), .CH(c)) u_pll (
      .clk, .rst_n,
      .adc_i(adc_i[c]), .f_off(f_off[c]), .kp(kp[c]), .ki(ki[c]),
      .q_o(q_o[c]), .i_o(i_o[c]), .u_d_o(u_d_unused), .u_f_o(u_f_unused),
      .pir_o(pir_o[c]), .pa_o(pa_o[c]), .sat_o(sat_o[c])
    );

    cic_decimator #(.WI(T + 1), .ORDER(ORDER), .RLOG2(RLOG2)) u_cic_pir (
      .clk, .rst_n, .in_i(signed'({1'b0, pir_o[c]})), .out_o(dec_pir_o[c]), .out_valid(v_pir[c])
    );
    cic_decimator #(.WI(K + F), .ORDER(ORDER), .RLOG2(RLOG2)) u_cic_i (
      .clk, .rst_n, .in_i(i_o[c]), .out_o(dec_i_o[c]), .out_valid(v_i[c])
    );
    // Q is read before the 2f filter; shifted by F bits to the scale of I
    cic_decimator #(.WI(K + F), .ORDER(ORDER), .RLOG2(RLOG2)) u_cic_q (
      .clk, .rst_n, .in_i({q_o[c], {F{1'b0}}}), .out_o(dec_q_o[c]), .out_valid(v_q[c])
    );

    logic iq_busy_unused;
    iq_readout #(.W(IQW), .PH(PH)) u_iq (
      .clk, .rst_n, .start(dec_valid),
      .i_i(dec_i_o[c][DW_IQ-1 -: IQW]), .q_i(dec_q_o[c][DW_IQ-1 -: IQW]),
      .busy(iq_busy_unused), .done(v_iq_done[c]),
      .phase_o(iq_phase_o[c]), .mag_o(iq_mag_o[c])
    );
  end

  pa_diff #(.NC(NC), .T(T)) u_pa_diff (.clk, .rst_n, .pa_i(pa_o), .diff_o(padiff_o));

  for (genvar c = 0; c < int'(NC) - 1; c++) begin : g_pa
    cic_decimator #(.WI(T), .ORDER(ORDER), .RLOG2(RLOG2)) u_cic_pa (
      .clk, .rst_n, .in_i(padiff_o[c]), .out_o(dec_padiff_o[c]), .out_valid(v_pa[c])
    );
  end

  assign dec_valid = v_pir[0];
  assign iq_done   = v_iq_done[0];

  // all decimators share reset and rate, so their strobes coincide
  always_comb begin
    if (rst_n) begin
      assert ((v_pir == v_i) && (v_i == v_q) && (v_pa == {(NC-1){v_pir[0]}}))
        else $error("phasemeter_core: decimator strobes out of step");
      assert (v_iq_done == {NC{v_iq_done[0]}})
        else $error("phasemeter_core: IQ readouts out of step");
    end
  end

  initial begin
    assert (NC >= 2) else $error("phasemeter_core: needs at least two channels");
    assert (DW_IQ >= IQW) else $error("phasemeter_core: IQW too wide");
  end

endmodule
