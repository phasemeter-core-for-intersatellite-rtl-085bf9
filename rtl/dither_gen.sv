// dither_gen -- triangular dither source.
//
// Two independent maximal-length Fibonacci LFSRs (41 bits, taps 41/38, and
// 47 bits, taps 47/42) each advance DW steps per clock, so every cycle yields
// a fresh DW-bit uniform word from each. Their difference has a triangular
// probability density on (-2^DW, 2^DW), the dither preferred before a
// truncation. The 41-bit register repeats after (2^41-1) clocks, about
// 27 500 s at 80 MHz, which meets the published requirement of a repetition
// length above 10 000 s; the pair repeats far later. Building the dither from
// two LFSRs follows the published design; the register lengths, taps and
// seeds are this implementation's choice.
//
// Interface: tri_o (signed, DW+1 bits) and tie_o (one random bit, used by the
// rounding blocks to settle exact halves) are registered and change every
// clock. SEED_A/SEED_B must be non-zero; give every instance its own seeds.
module dither_gen #(
  parameter int unsigned DW     = pm_pkg::DITHER_W,
  parameter logic [40:0] SEED_A = 41'h0_1234_5678_9,
  parameter logic [46:0] SEED_B = 47'h0_7654_3210_FED
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic signed [DW:0]   tri_o,
  output logic                 tie_o
);

  logic [40:0] lfsr_a, lfsr_a_nx;
  logic [46:0] lfsr_b, lfsr_b_nx;

  // Advance both registers DW steps; each step shifts left and feeds the
  // XOR of the tap bits into bit 0.
  always_comb begin
    lfsr_a_nx = lfsr_a;
    lfsr_b_nx = lfsr_b;
    for (int s = 0; s < int'(DW); s++) begin
      lfsr_a_nx = {lfsr_a_nx[39:0], lfsr_a_nx[40] ^ lfsr_a_nx[37]};
      lfsr_b_nx = {lfsr_b_nx[45:0], lfsr_b_nx[46] ^ lfsr_b_nx[41]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_a <= SEED_A;
      lfsr_b <= SEED_B;
      tri_o  <= '0;
      tie_o  <= 1'b0;
    end else begin
      lfsr_a <= lfsr_a_nx;
      lfsr_b <= lfsr_b_nx;
      tri_o  <= $signed({1'b0, lfsr_a_nx[DW-1:0]}) - $signed({1'b0, lfsr_b_nx[DW-1:0]});
      tie_o  <= lfsr_a_nx[DW] ^ lfsr_b_nx[DW];
    end
  end

  initial begin
    assert (DW >= 1 && DW <= 40) else $error("dither_gen: DW must be 1..40");
  end

endmodule
