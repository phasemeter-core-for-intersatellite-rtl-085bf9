// tb_pd_mixer -- checks the mixer: output equals sig*lo/2^(N+M-K) within the
// +-1.5 LSB of dithered rounding, with a two-clock latency, and the mean over
// many dithered samples equals the exact product (no offset).
module tb_pd_mixer;
  localparam int N = 16, M = 10, K = 18, TW = 33, S = N + M - K;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [N-1:0] sig_i;
  logic signed [M-1:0] lo_i;
  logic signed [TW-1:0] dither;
  logic tie;
  logic signed [K-1:0] mix_o;
  int checks = 0, failures = 0;

  pd_mixer #(.N(N), .M(M), .K(K), .TW(TW)) dut (.clk, .rst_n, .sig_i, .lo_i, .dither, .tie, .mix_o);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exp_q [$];
    real e, acc;
    sig_i = '0; lo_i = '0; dither = '0; tie = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      sig_i  = N'($urandom);
      lo_i   = M'($urandom);
      dither = TW'(longint'($urandom) - longint'($urandom));
      tie    = 1'($urandom);
      exp_q.push_back(real'(sig_i) * real'(lo_i) / (2.0 ** S));
      @(posedge clk); #1;
      if (exp_q.size() == 2) begin
        e = exp_q.pop_front();
        checks++;
        if (real'(mix_o) - e > 1.5 || e - real'(mix_o) > 1.5) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d mix=%0d exp %f", n, mix_o, e);
        end
      end
      @(negedge clk);
    end
    // offset-free: constant inputs, mean over dithered samples
    sig_i = 16'sd12345; lo_i = -10'sd333;
    acc = 0.0;
    repeat (4) @(posedge clk);
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      dither = TW'(longint'($urandom) - longint'($urandom));
      tie    = 1'($urandom);
      acc += real'(mix_o);
    end
    e = 12345.0 * -333.0 / (2.0 ** S);
    checks++;
    if (acc / 20000.0 - e > 0.03 || e - acc / 20000.0 > 0.03) begin
      failures++;
      $display("FAIL mean %f exp %f", acc / 20000.0, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
