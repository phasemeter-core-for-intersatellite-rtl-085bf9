// tb_pi_servo -- checks the gain reduction and PI servo against a 64-bit
// integer model of kp*u_g + (sum of earlier ki*u_g)/2^KI_SHIFT, including
// output and integrator saturation and the saturation flag.
module tb_pi_servo;
  localparam int K = 18, F = 8, C = 16, KW = 16, KIS = 8;
  localparam int W = K + F + C, IW = W + KIS;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [K+F-1:0] u_d_i;
  logic [KW-1:0] kp, ki;
  logic signed [W-1:0] u_f_o;
  logic sat_o;
  int checks = 0, failures = 0;

  pi_servo #(.K(K), .F(F), .C(C), .KW(KW), .KI_SHIFT(KIS)) dut (.clk, .rst_n, .u_d_i, .kp, .ki, .u_f_o, .sat_o);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint integ;   // model integrator
  int nsat;

  function automatic longint clamp(longint v, int w, output bit s);
    longint mx, mn;
    mx = (64'sd1 <<< (w - 1)) - 1;
    mn = -(64'sd1 <<< (w - 1));
    s = 1'b0;
    if (v > mx) begin s = 1'b1; return mx; end
    if (v < mn) begin s = 1'b1; return mn; end
    return v;
  endfunction

  task automatic step(longint ud);
    longint e, isum;
    bit s1, s2;
    u_d_i = (K+F)'(ud);
    e = clamp(longint'(kp) * ud + (integ >>> KIS), W, s1);
    isum = integ + longint'(ki) * ud;
    integ = clamp(isum, IW, s2);
    @(posedge clk); #1;
    checks++;
    if (longint'(u_f_o) != e || sat_o != (s1 | s2)) begin
      failures++;
      if (failures < 10) $display("FAIL ud=%0d u_f=%0d exp %0d sat=%0d exp %0d", ud, u_f_o, e, sat_o, s1 | s2);
    end
    nsat += int'(sat_o);
    @(negedge clk);
  endtask

  initial begin
    u_d_i = '0; kp = '0; ki = '0;
    integ = 0; nsat = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    kp = 16'd524; ki = 16'd84;
    for (int n = 0; n < 3000; n++) step(longint'($signed(20'($urandom))));
    // proportional only
    kp = 16'd1000; ki = 16'd0;
    for (int n = 0; n < 500; n++) step(longint'($signed(26'($urandom))));
    // drive the integrator into saturation with a large constant error
    kp = 16'd65535; ki = 16'd65535;
    for (int n = 0; n < 2000; n++) step((64'sd1 <<< 25) - 1);
    for (int n = 0; n < 2000; n++) step(-(64'sd1 <<< 25));
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
