// pi_servo -- gain reduction and proportional-integral servo of the ADPLL.
//
// The filtered error u_d (K+F bits) is first extended by C sign bits on the
// left. In the 2^-X scaling this multiplies the represented value by 2^-C
// (the gain reduction stage F_Gain), while the integer is unchanged. The PI
// controller then forms
//     u_f[n] = kp * u_g[n] + (1/2^KI_SHIFT) * sum_{k<n} ki * u_g[k],
// i.e. kappa_p + kappa_i z^-1/(1-z^-1) followed by one output register.
// kp and ki are run-time unsigned integers; the integrator keeps KI_SHIFT
// extra fraction bits so that small integral gains can be set. Both the
// integrator and the output saturate at their word limits instead of
// wrapping, and sat_o reports when either limit was reached.
//
// Gain reduction by bit extension and the PI transfer function follow the
// published design. The integer gain words, the integrator fraction bits and
// saturation are this implementation's choices.
//
// Timing: u_f_o is registered, latency 1 clock from u_d_i.
module pi_servo #(
  parameter int unsigned K        = pm_pkg::K_PD,
  parameter int unsigned F        = pm_pkg::F_LF,
  parameter int unsigned C        = pm_pkg::C_GAIN,
  parameter int unsigned KW       = pm_pkg::KAPPA_W,
  parameter int unsigned KI_SHIFT = pm_pkg::KI_SHIFT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [K+F-1:0]    u_d_i,
  input  logic [KW-1:0]            kp,
  input  logic [KW-1:0]            ki,
  output logic signed [K+F+C-1:0]  u_f_o,
  output logic                     sat_o
);

  localparam int unsigned W  = K + F + C;        // u_g, u_f width
  localparam int unsigned IW = W + KI_SHIFT;     // integrator width
  localparam int unsigned XW = IW + KW + 2;      // scratch width

  logic signed [W-1:0]  u_g;
  logic signed [IW-1:0] integ;
  logic signed [XW-1:0] prop, isum, osum;
  logic signed [IW-1:0] integ_nx;
  logic signed [W-1:0]  u_f_nx;
  logic                 isat, osat;

  localparam logic signed [XW-1:0] I_MAX = XW'((IW)'({1'b0, {(IW-1){1'b1}}}));
  localparam logic signed [XW-1:0] I_MIN = -(XW'(1) <<< (IW - 1));
  localparam logic signed [XW-1:0] O_MAX = XW'((W)'({1'b0, {(W-1){1'b1}}}));
  localparam logic signed [XW-1:0] O_MIN = -(XW'(1) <<< (W - 1));

  // gain reduction: C bits added on the left
  assign u_g = W'(u_d_i);

  always_comb begin
    prop = XW'(u_g) * XW'(signed'({1'b0, kp}));
    isum = XW'(integ) + XW'(u_g) * XW'(signed'({1'b0, ki}));
    isat = 1'b0;
    if (isum > I_MAX) begin
      integ_nx = I_MAX[IW-1:0];
      isat     = 1'b1;
    end else if (isum < I_MIN) begin
      integ_nx = I_MIN[IW-1:0];
      isat     = 1'b1;
    end else begin
      integ_nx = isum[IW-1:0];
    end
    // proportional path plus the integrator value of the previous samples
    osum = prop + (XW'(integ) >>> KI_SHIFT);
    osat = 1'b0;
    if (osum > O_MAX) begin
      u_f_nx = O_MAX[W-1:0];
      osat   = 1'b1;
    end else if (osum < O_MIN) begin
      u_f_nx = O_MIN[W-1:0];
      osat   = 1'b1;
    end else begin
      u_f_nx = osum[W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0;
      u_f_o <= '0;
      sat_o <= 1'b0;
    end else begin
      integ <= integ_nx;
      u_f_o <= u_f_nx;
      sat_o <= isat | osat;
    end
  end

endmodule
