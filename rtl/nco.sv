// nco -- numerically controlled oscillator: phase accumulator, phase
// truncation and sine/cosine look-up.
//
// The phase accumulator (PA) adds the T-bit phase increment (PIR) every
// clock, modulo 2^T, so its value is the oscillator phase in cycles
// (transfer function z^-1/(1-z^-1)). The PA word is reduced to the M-bit
// LUT address by a dithered, offset-free rounding block (wrapping, since
// phase is modulo one cycle), then sincos_lut produces sine and cosine of
// amplitude 1/2. The PA -> truncation -> LUT structure and the widths T and
// M follow the published loop model; M = 10 is this implementation's choice.
//
// Timing: pa_o is the accumulator register; sin_o/cos_o correspond to the
// PA value of two clocks earlier (rounding register, LUT register).
module nco #(
  parameter int unsigned T  = pm_pkg::T_FREQ,
  parameter int unsigned M  = pm_pkg::M_LUT,
  parameter int unsigned TW = pm_pkg::TRI_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [T-1:0]         pir,      // phase increment, cycles/sample * 2^T
  input  logic signed [TW-1:0] dither,
  input  logic                 tie,
  output logic [T-1:0]         pa_o,     // phase accumulator, cycles * 2^T
  output logic signed [M-1:0]  sin_o,
  output logic signed [M-1:0]  cos_o
);

  logic [T-1:0]        pa;
  logic signed [M-1:0] ph_m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pa <= '0;
    else        pa <= pa + pir;
  end
  assign pa_o = pa;

  round_dither #(.WI(T), .WO(M), .SAT(1'b0), .TW(TW)) u_ph_round (
    .clk, .rst_n, .x(pa), .dither, .tie, .y(ph_m)
  );

  sincos_lut #(.M(M)) u_lut (
    .clk, .rst_n, .phase(ph_m), .sin_o, .cos_o
  );

  initial begin
    assert (T >= M) else $error("nco: T must not be below M");
  end

endmodule
