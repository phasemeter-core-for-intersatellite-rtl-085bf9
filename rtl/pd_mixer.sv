// pd_mixer -- digital mixer used as phase detector (Q arm) and amplitude
// detector (I arm).
//
// Multiplies the N-bit input sample by the M-bit local oscillator word. The
// exact N+M-bit product, i.e. i[n]*o[n] in the 2^-X scaling, is reduced to
// K bits by a dithered offset-free rounding block (saturating). With the
// cosine as oscillator the output is Q = A/4*sin(phase error) plus a second
// harmonic; with the sine it is I = A/4*cos(phase error) plus a second
// harmonic. Multiply-then-truncate from N+M to K bits follows the published
// loop model; K = 18 is this implementation's choice.
//
// Timing: product register then rounding register, latency 2 clocks, one
// sample per clock.
module pd_mixer #(
  parameter int unsigned N  = pm_pkg::N_ADC,
  parameter int unsigned M  = pm_pkg::M_LUT,
  parameter int unsigned K  = pm_pkg::K_PD,
  parameter int unsigned TW = pm_pkg::TRI_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [N-1:0]  sig_i,     // digitised input i[n]
  input  logic signed [M-1:0]  lo_i,      // NCO output (sine or cosine)
  input  logic signed [TW-1:0] dither,
  input  logic                 tie,
  output logic signed [K-1:0]  mix_o
);

  logic signed [N+M-1:0] prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prod <= '0;
    else        prod <= sig_i * lo_i;
  end

  round_dither #(.WI(N + M), .WO(K), .SAT(1'b1), .TW(TW)) u_round (
    .clk, .rst_n, .x(prod), .dither, .tie, .y(mix_o)
  );

  initial begin
    assert (N + M >= K) else $error("pd_mixer: K must not exceed N+M");
  end

endmodule
