// tb_nco -- checks the NCO: the phase accumulator adds the PIR modulo 2^T
// every clock; sine and cosine follow the accumulator two clocks later
// within the error of the dithered phase truncation; and a phase between
// two LUT addresses is reproduced on average (dithered truncation).
module tb_nco;
  localparam int T = 12, M = 10, TW = 33;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [T-1:0] pir, pa_o;
  logic signed [TW-1:0] dither;
  logic tie;
  logic signed [M-1:0] sin_o, cos_o;
  int checks = 0, failures = 0;

  nco #(.T(T), .M(M), .TW(TW)) dut (.clk, .rst_n, .pir, .dither, .tie, .pa_o, .sin_o, .cos_o);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    dither <= TW'(longint'($urandom) - longint'($urandom));
    tie    <= 1'($urandom);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [T-1:0] pa_hist [3];
    logic [T-1:0] pa_exp;
    real a, ph, es, ec, acc;
    a = 2.0 ** (M - 1) - 1.0;
    pir = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    pa_exp = '0;
    pir = 12'd307;   // 6 MHz at 80 MHz
    for (int n = 0; n < 3; n++) pa_hist[n] = '0;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk); #1;
      pa_exp = pa_exp + 12'd307;
      checks++;
      if (pa_o != pa_exp) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d pa=%0d exp %0d", n, pa_o, pa_exp);
      end
      // LUT output belongs to the PA value two clocks earlier
      pa_hist[2] = pa_hist[1]; pa_hist[1] = pa_hist[0]; pa_hist[0] = pa_o;
      if (n > 4) begin
        ph = real'(pa_hist[2]) / (2.0 ** T);
        es = a * $sin(2.0 * 3.14159265358979 * ph);
        ec = a * $cos(2.0 * 3.14159265358979 * ph);
        checks++;
        // dithered rounding errs by up to 1.5 LUT steps: 1.5*2*pi*a/2^M plus 0.5
        if (real'(sin_o) - es > 5.4 || es - real'(sin_o) > 5.4 ||
            real'(cos_o) - ec > 5.4 || ec - real'(cos_o) > 5.4) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d ph=%f sin=%0d (%f) cos=%0d (%f)", n, ph, sin_o, es, cos_o, ec);
        end
      end
    end
    // hold the phase a quarter LUT step above zero: PA = 1 of 4
    @(negedge clk);
    pir = 12'(4096 - int'(pa_o) + 1);
    @(negedge clk);
    pir = '0;
    repeat (5) @(posedge clk);
    checks++;
    if (pa_o != 12'd1) begin failures++; $display("FAIL hold pa=%0d", pa_o); end
    acc = 0.0;
    for (int n = 0; n < 20000; n++) begin
      @(posedge clk); #1;
      acc += real'(sin_o);
    end
    // mean of sin over a phase dithered between 0 and 1/1024 cycle
    es = a * $sin(2.0 * 3.14159265358979 / 4096.0);
    checks++;
    if (acc / 20000.0 < es - 0.25 || acc / 20000.0 > es + 0.25) begin
      failures++;
      $display("FAIL mean sin %f expected about %f", acc / 20000.0, es);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
