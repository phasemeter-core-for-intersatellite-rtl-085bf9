// pir_reg -- frequency truncation and phase increment register (PIR).
//
// The W-bit servo output u_f (cycles/sample, signed) is truncated to T bits
// by a dithered offset-free rounding block. The truncation is inside the
// loop, so its white frequency noise is suppressed by the loop error
// function; with T = 12 at 80 MHz one LSB is about 19.5 kHz, the setting of
// the published design. The frequency preset u_f,0 (f_off, unsigned T bits,
// f = f_off * fs / 2^T) is then added modulo 2^T and stored in the PIR,
// which drives the phase accumulator and is the frequency readout. Presetting
// f_off near the input frequency is what allows lock acquisition.
//
// Structure and T follow the published design; saturation of the truncated
// correction at +-1/2 cycle/sample is this implementation's choice.
//
// Timing: rounding register then PIR register, latency 2 clocks.
module pir_reg #(
  parameter int unsigned W  = pm_pkg::K_PD + pm_pkg::F_LF + pm_pkg::C_GAIN,
  parameter int unsigned T  = pm_pkg::T_FREQ,
  parameter int unsigned TW = pm_pkg::TRI_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  u_f_i,
  input  logic [T-1:0]         f_off,
  input  logic signed [TW-1:0] dither,
  input  logic                 tie,
  output logic [T-1:0]         pir_o
);

  logic signed [T-1:0] u_f_t;

  round_dither #(.WI(W), .WO(T), .SAT(1'b1), .TW(TW)) u_round (
    .clk, .rst_n, .x(u_f_i), .dither, .tie, .y(u_f_t)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pir_o <= '0;
    else        pir_o <= f_off + T'(u_f_t);
  end

endmodule
