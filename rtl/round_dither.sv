// round_dither -- dithered, offset-free word-length reduction.
//
// Drops S = WI-WO low bits of x. A triangular dither word, scaled to +-1
// output LSB, is added first so that the truncation error behaves as white
// noise instead of producing spurs. The sum is then rounded to nearest;
// an exact half is rounded up or down according to the random tie bit, so
// the rounding is symmetric about zero and adds no mean offset. With the
// dither input held at zero the block is a plain unbiased rounder.
// The overflow that rounding can cause at the top of the range is either
// clamped (SAT=1, for signals) or wrapped (SAT=0, for phases and other
// modulo quantities).
//
// The use of dither, symmetric offset-free rounding and a dithered tie bit
// follows the published design; the exact arithmetic (dither of +-1 LSB,
// round-to-nearest, saturation option) is this implementation's choice.
//
// Timing: one register, latency 1 clock, one result per clock.
module round_dither #(
  parameter int unsigned WI  = 26,
  parameter int unsigned WO  = 18,
  parameter bit          SAT = 1'b1,
  parameter int unsigned TW  = pm_pkg::TRI_W   // width of the triangular dither input
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [WI-1:0]  x,
  input  logic signed [TW-1:0]  dither,  // triangular, range +-2^(TW-1)
  input  logic                  tie,
  output logic signed [WO-1:0]  y
);

  localparam int unsigned S  = WI - WO;
  localparam int unsigned VW = WI + 2;

  logic signed [VW-1:0] d_s;    // dither scaled to +-2^S
  logic signed [VW-1:0] v;
  logic signed [VW-1:0] q;
  logic signed [WO-1:0] y_nx;

  localparam logic signed [VW-1:0] HALF_MASK = (S > 1) ? ((VW'(1) <<< (S - 1)) - VW'(1)) : '0;
  localparam logic signed [VW-1:0] Q_MAX = VW'((64'(1) << (WO - 1)) - 64'(1));
  localparam logic signed [VW-1:0] Q_MIN = -(VW'(1) <<< (WO - 1));

  localparam logic signed [TW:0] D_HALF = (S > 0 && S < TW - 1) ? ((TW + 1)'(1) <<< (TW - 2 - S)) : '0;
  logic signed [TW:0] d_rnd;
  assign d_rnd = (TW + 1)'(dither) + D_HALF;

  logic half_bit;   // weight 1/2 LSB of the result
  logic below_nz;   // any bit below it set

  always_comb begin
    // scale the dither so that its full range is one output LSB either way
    if (S == 0) begin
      d_s = '0;
    end else if (S <= TW - 1) begin
      // rounded, not floored, so that the scaled dither keeps zero mean
      d_s = VW'(d_rnd >>> (TW - 1 - S));
    end else begin
      d_s = VW'(dither) <<< (S - (TW - 1));
    end
    v = VW'(x) + d_s;
    q = v >>> S;
    half_bit = (S > 0) ? v[(S > 0) ? S - 1 : 0] : 1'b0;
    below_nz = (v & HALF_MASK) != '0;
    if (half_bit && below_nz) begin
      q = q + VW'(1);                    // above one half
    end else if (half_bit) begin
      q = q + VW'(tie);                  // exactly one half: random direction
    end
    if (SAT && q > Q_MAX) begin
      y_nx = Q_MAX[WO-1:0];
    end else if (SAT && q < Q_MIN) begin
      y_nx = Q_MIN[WO-1:0];
    end else begin
      y_nx = q[WO-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) y <= '0;
    else        y <= y_nx;
  end

  initial begin
    assert (WI >= WO) else $error("round_dither: WI must not be below WO");
  end

endmodule
