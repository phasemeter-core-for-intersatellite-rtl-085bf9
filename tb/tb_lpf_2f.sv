// tb_lpf_2f -- checks the 2f filter: step response against a real-valued
// model of two cascaded first-order sections, DC gain of one, the -3 dB
// corner at 300 kHz (80 MHz sampling) and the attenuation of a 12 MHz
// second harmonic. Throughout, and over a final stretch of random
// full-scale input, every output sample is also compared bit for bit with
// a 64-bit integer model of the two sections and their 16 fraction bits.
module tb_lpf_2f;
  localparam int K = 18, F = 8;
  localparam real FS = 80.0e6;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [K-1:0] x_i;
  logic signed [K+F-1:0] y_o;
  int checks = 0, failures = 0;

  lpf_2f #(.K(K), .F(F)) dut (.clk, .rst_n, .x_i, .y_o);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit-exact integer model: s += (x - s>>16) * 2355, states with 16 fraction bits
  longint m1 = 0, m2 = 0;
  int exact_bad = 0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m1 <= 0;
      m2 <= 0;
    end else begin
      m1 <= m1 + ((longint'(x_i) <<< F) - (m1 >>> 16)) * 2355;
      m2 <= m2 + ((m1 >>> 16) - (m2 >>> 16)) * 2355;
    end
  end
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (longint'(y_o) != (m2 >>> 16)) begin
        failures++;
        exact_bad++;
        if (exact_bad < 5) $display("FAIL exact model: y=%0d model %0d", y_o, m2 >>> 16);
      end
    end
  end

  // amplitude of the output for a sine input of frequency f
  task automatic tone_gain(input real f, output real g);
    real pk;
    pk = 0.0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      x_i = K'($rtoi($floor(60000.0 * $sin(2.0 * 3.14159265358979 * f / FS * n) + 0.5)));
      if (n > 3000) begin
        if (real'(y_o) > pk) pk = real'(y_o);
        if (-real'(y_o) > pk) pk = -real'(y_o);
      end
    end
    g = pk / (60000.0 * 2.0 ** F);
  endtask

  initial begin
    real a, s1, s2, g;
    int bad;
    a = 2355.0 / 65536.0;
    x_i = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // step response
    s1 = 0.0; s2 = 0.0; bad = 0;
    x_i = 18'sd50000;
    for (int n = 0; n < 1500; n++) begin
      @(posedge clk); #1;
      s2 = s2 + a * (s1 - s2);
      s1 = s1 + a * (50000.0 * 2.0 ** F - s1);
      if (real'(y_o) - s2 > 300.0 || s2 - real'(y_o) > 300.0) begin
        bad++;
        if (bad < 5) $display("FAIL step n=%0d y=%0d model %f", n, y_o, s2);
      end
    end
    checks++;
    if (bad != 0) failures++;
    checks++;
    if (y_o < (K+F)'(50000 * 256 - 4) || y_o > (K+F)'(50000 * 256 + 4)) begin
      failures++; $display("FAIL DC gain: %0d", y_o);
    end
    tone_gain(30.0e3, g);
    checks++;
    if (g < 0.97 || g > 1.02) begin failures++; $display("FAIL gain at 30 kHz %f", g); end
    tone_gain(300.0e3, g);
    checks++;
    if (g < 0.66 || g > 0.76) begin failures++; $display("FAIL gain at 300 kHz %f, -3 dB expected", g); end
    tone_gain(12.0e6, g);
    checks++;
    if (g > 0.003) begin failures++; $display("FAIL gain at 12 MHz %f", g); end
    // random full-scale input, including both extremes
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      case (n % 7)
        0: x_i = {1'b0, {(K-1){1'b1}}};
        1: x_i = {1'b1, {(K-1){1'b0}}};
        default: x_i = K'($urandom);
      endcase
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
