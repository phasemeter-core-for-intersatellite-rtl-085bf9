// pm_pkg -- shared constants of the phasemeter core.
//
// All words follow one fixed-point convention: an X-bit integer stands for
// the number integer * 2^-X, so a signed word lies in [-0.5, 0.5) and an
// unsigned word in [0, 1). Phases are in cycles, frequencies in cycles per
// sample (multiply by FS_HZ for Hz). The widths are named after the loop
// model: N (ADC), M (LUT phase and amplitude), K (phase detector output),
// F (extra bits of the 2f filter), C (gain reduction shift) and T (frequency
// and phase accumulator). Only T = 12 and the 80 MHz sample rate are taken
// from the published design; the other widths are this implementation's
// choices.
package pm_pkg;

  localparam int unsigned FS_HZ      = 80_000_000; // sample rate
  localparam int unsigned N_ADC      = 16;   // ADC word
  localparam int unsigned M_LUT      = 10;   // LUT phase in / amplitude out
  localparam int unsigned K_PD       = 18;   // phase detector output
  localparam int unsigned F_LF       = 8;    // bits added by the 2f filter
  localparam int unsigned C_GAIN     = 16;   // gain reduction 2^-C
  localparam int unsigned T_FREQ     = 12;   // PIR and PA width
  localparam int unsigned KAPPA_W    = 16;   // PI gain word (unsigned)
  localparam int unsigned KI_SHIFT   = 8;    // extra fraction bits of the integrator
  localparam int unsigned LPF_ALPHA  = 2355; // pole coefficient * 2^16 of each 2f filter section
  localparam int unsigned LPF_AW     = 16;   // fraction bits of LPF_ALPHA
  localparam int unsigned DITHER_W   = 32;   // uniform word taken from each LFSR
  localparam int unsigned CIC_ORDER  = 3;
  localparam int unsigned CIC_RLOG2  = 24;   // decimation by 2^24: 80 MHz -> 4.77 Hz
  localparam int unsigned NCH        = 4;    // tracking channels
  localparam int unsigned IQ_W       = 32;   // word fed to the IQ readout
  localparam int unsigned PH_W       = 24;   // IQ readout phase word (cycles)
  localparam int unsigned CORDIC_ITER = 20;

  // Triangular dither word: difference of two DITHER_W-bit uniform words.
  localparam int unsigned TRI_W = DITHER_W + 1;

endpackage
