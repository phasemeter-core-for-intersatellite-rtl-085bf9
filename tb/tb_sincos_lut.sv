// tb_sincos_lut -- checks every LUT address against sin/cos of amplitude
// 2^(M-1)-1 (within one LSB) and the one-clock latency.
module tb_sincos_lut;
  localparam int M = 10;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [M-1:0] phase;
  logic signed [M-1:0] sin_o, cos_o;
  int checks = 0, failures = 0;

  sincos_lut #(.M(M)) dut (.clk, .rst_n, .phase, .sin_o, .cos_o);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, es, ec;
    a = 2.0 ** (M - 1) - 1.0;
    phase = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 2 ** M; p++) begin
      phase = M'(p);
      @(posedge clk); #1;
      es = a * $sin(2.0 * 3.14159265358979 * p / (2.0 ** M));
      ec = a * $cos(2.0 * 3.14159265358979 * p / (2.0 ** M));
      checks++;
      if (real'(sin_o) - es > 0.51 || es - real'(sin_o) > 0.51 ||
          real'(cos_o) - ec > 0.51 || ec - real'(cos_o) > 0.51) begin
        failures++;
        if (failures < 10) $display("FAIL p=%0d sin=%0d (%f) cos=%0d (%f)", p, sin_o, es, cos_o, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
