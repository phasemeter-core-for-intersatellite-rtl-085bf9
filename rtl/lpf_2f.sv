// lpf_2f -- second-order IIR low-pass filter that removes the second
// harmonic (2f) term of the mixer output.
//
// Two identical first-order sections in cascade, each
//     s[n+1] = s[n] + ALPHA/2^AW * (x[n] - s[n]),
// give a DC gain of one and a double real pole. The K-bit input is widened
// by F fraction bits, so the output has K+F bits with the same scaling of
// the represented value (the filter adds F bits, as in the published loop
// model). The default ALPHA = 2355/65536 puts each pole at 466 kHz for an
// 80 MHz sample rate, which places the -3 dB corner of the cascade at
// 300 kHz, the corner of the second-order IIR used in the published
// simulations. The section structure and the coefficient encoding are this
// implementation's choice; the paper names only the order and the corner.
//
// Timing: one register per section, latency 2 clocks to the first response,
// one sample per clock.
module lpf_2f #(
  parameter int unsigned K     = pm_pkg::K_PD,
  parameter int unsigned F     = pm_pkg::F_LF,
  parameter int unsigned ALPHA = pm_pkg::LPF_ALPHA,
  parameter int unsigned AW    = pm_pkg::LPF_AW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [K-1:0]    x_i,
  output logic signed [K+F-1:0]  y_o
);

  localparam int unsigned SW = K + F;            // section output width
  localparam int unsigned AW2 = SW + AW;          // state width with AW fraction bits
  // The product is formed modulo 2^AW2: the updated state always lies
  // between the old state and the input, so it fits even when the
  // intermediate product would not.
  localparam int unsigned PW = AW2;               // product width

  // Each state keeps AW fraction bits below its output, so the residue of
  // every update is carried forward instead of lost: the step response
  // settles exactly on the input and there is no dead band.
  logic signed [AW2-1:0] s1f, s2f;
  logic signed [SW-1:0]  s1, s2;

  function automatic logic signed [AW2-1:0] step(input logic signed [AW2-1:0] sf,
                                                 input logic signed [SW-1:0]  x);
    logic signed [SW:0]   d;
    logic signed [PW-1:0] p;
    d = (SW + 1)'(x) - (SW + 1)'(sf >>> AW);
    p = PW'(d) * PW'(signed'({1'b0, AW'(ALPHA)}));
    return sf + AW2'(p);
  endfunction

  assign s1 = SW'(s1f >>> AW);
  assign s2 = SW'(s2f >>> AW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1f <= '0;
      s2f <= '0;
    end else begin
      s1f <= step(s1f, {x_i, {F{1'b0}}});
      s2f <= step(s2f, s1);
    end
  end

  assign y_o = s2;

  initial begin
    assert (ALPHA > 0 && ALPHA < 2 ** AW) else $error("lpf_2f: ALPHA must lie in (0, 2^AW)");
  end

endmodule
