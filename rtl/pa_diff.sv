// pa_diff -- phase accumulator difference readout.
//
// When several channels track the same beat note with small phase
// differences, the difference of their phase accumulators removes the
// common phase ramp and leaves only the small differential phase, as needed
// for differential wavefront sensing. This block forms, every clock,
// diff_o[k] = PA[k+1] - PA[0] modulo 2^T, read as a signed T-bit number of
// cycles * 2^T, so a difference within +-1/2 cycle is exact and a cycle
// slip of one channel leaves the readout only while it lasts. Subtracting
// PA values follows the published design; taking channel 0 as the common
// reference is this implementation's choice.
//
// Timing: registered, latency 1 clock.
module pa_diff #(
  parameter int unsigned NC = pm_pkg::NCH,
  parameter int unsigned T  = pm_pkg::T_FREQ
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [T-1:0]        pa_i   [NC],
  output logic signed [T-1:0] diff_o [NC-1]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(NC) - 1; k++) diff_o[k] <= '0;
    end else begin
      for (int k = 0; k < int'(NC) - 1; k++) diff_o[k] <= signed'(pa_i[k+1] - pa_i[0]);
    end
  end

  initial begin
    assert (NC >= 2) else $error("pa_diff: needs at least two channels");
  end

endmodule
