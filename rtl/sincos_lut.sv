// sincos_lut -- sine and cosine look-up table of the NCO.
//
// Maps an M-bit phase p (cycles, p/2^M) to sin_o = round(A*sin(2*pi*p/2^M))
// and cos_o = round(A*cos(2*pi*p/2^M)) with A = 2^(M-1)-1, i.e. an output of
// amplitude 1/2 in the 2^-M scaling, as the loop model assumes for the local
// oscillator. Input and output have the same word length M, as in the
// published loop model. One full-cycle table of 2^M entries is computed at
// elaboration (A*sin(2*pi*k/2^M), rounded); the cosine reads it a quarter
// cycle ahead. The table construction is this implementation's choice.
//
// Timing: both outputs are registered, latency 1 clock, one lookup per clock.
module sincos_lut #(
  parameter int unsigned M = pm_pkg::M_LUT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [M-1:0]         phase,
  output logic signed [M-1:0]  sin_o,
  output logic signed [M-1:0]  cos_o
);

  localparam int unsigned DEPTH = 2 ** M;
  typedef logic signed [M-1:0] tab_t [DEPTH];

  function automatic tab_t make_table();
    tab_t  t;
    real   amp;
    amp = 2.0 ** (M - 1) - 1.0;
    for (int k = 0; k < int'(DEPTH); k++) begin
      t[k] = M'($rtoi($floor(amp * $sin(2.0 * 3.14159265358979323846 * real'(k) / real'(DEPTH)) + 0.5)));
    end
    return t;
  endfunction

  localparam tab_t SIN_TAB = make_table();

  logic [M-1:0] cos_addr;
  assign cos_addr = phase + M'(DEPTH / 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sin_o <= '0;
      cos_o <= '0;
    end else begin
      sin_o <= SIN_TAB[phase];
      cos_o <= SIN_TAB[cos_addr];
    end
  end

endmodule
