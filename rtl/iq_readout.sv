// iq_readout -- residual phase and amplitude from the I and Q readouts.
//
// For a loop locked near but not exactly at zero phase error,
// Q = A/4*sin(e) and I = A/4*cos(e). This block returns the residual phase
// e = atan2(Q, I) and the amplitude A/4 = sqrt(I^2 + Q^2), the diagnostic
// IQ readout of the published design, which applies it to the decimated I
// and Q. It uses an iterative CORDIC in vectoring mode: a start-up step
// folds the vector into the right half plane (adding 1/2 cycle when I < 0),
// then ITER micro-rotations by +-atan(2^-k) drive Q to zero while the
// rotation angles are accumulated. The final I is the magnitude times the
// CORDIC gain (about 1.6468), which is removed with one constant multiply.
// The CORDIC is this implementation's choice; the paper gives only the two
// formulas.
//
// Interface: pulse start with i_i/q_i valid; done pulses ITER+2 clocks
// later with phase_o (signed, cycles * 2^PH) and mag_o (same scale as the
// inputs). A start while busy is ignored.
module iq_readout #(
  parameter int unsigned W    = pm_pkg::IQ_W,
  parameter int unsigned PH   = pm_pkg::PH_W,
  parameter int unsigned ITER = pm_pkg::CORDIC_ITER
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [W-1:0]  i_i,
  input  logic signed [W-1:0]  q_i,
  output logic                 busy,
  output logic                 done,
  output logic signed [PH-1:0] phase_o,
  output logic [W-1:0]         mag_o
);

  localparam int unsigned XW = W + 2;
  localparam int unsigned GW = 18;   // fraction bits of the gain correction

  typedef logic signed [PH-1:0] ang_t [ITER];

  function automatic ang_t make_atan();
    ang_t a;
    for (int k = 0; k < int'(ITER); k++) begin
      a[k] = PH'($rtoi($floor($atan(2.0 ** (-k)) / (2.0 * 3.14159265358979323846)
                              * (2.0 ** PH) + 0.5)));
    end
    return a;
  endfunction

  function automatic int unsigned inv_gain();
    real g;
    g = 1.0;
    for (int k = 0; k < int'(ITER); k++) g = g * $sqrt(1.0 + 2.0 ** (-2 * k));
    return $rtoi($floor((2.0 ** GW) / g + 0.5));
  endfunction

  localparam ang_t        ATAN_TAB = make_atan();
  localparam int unsigned INV_G    = inv_gain();

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_t;
  state_t state;

  logic signed [XW-1:0] x, y;
  logic signed [PH-1:0] z;
  logic [$clog2(ITER+1)-1:0] k;
  logic signed [XW+GW:0] mag_full;

  assign busy     = (state != S_IDLE);
  assign mag_full = (XW + GW + 1)'(x) * (XW + GW + 1)'(INV_G);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      x       <= '0;
      y       <= '0;
      z       <= '0;
      k       <= '0;
      done    <= 1'b0;
      phase_o <= '0;
      mag_o   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          // fold into the right half plane
          if (i_i < 0) begin
            x <= -XW'(i_i);
            y <= -XW'(q_i);
            z <= {1'b1, {(PH-1){1'b0}}};   // 1/2 cycle
          end else begin
            x <= XW'(i_i);
            y <= XW'(q_i);
            z <= '0;
          end
          k     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (y >= 0) begin
            x <= x + (y >>> k);
            y <= y - (x >>> k);
            z <= z + ATAN_TAB[k];
          end else begin
            x <= x - (y >>> k);
            y <= y + (x >>> k);
            z <= z - ATAN_TAB[k];
          end
          if (k == ($clog2(ITER+1))'(ITER - 1)) state <= S_OUT;
          k <= k + 1'b1;
        end
        S_OUT: begin
          phase_o <= z;
          mag_o   <= W'(mag_full >>> GW);
          done    <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
