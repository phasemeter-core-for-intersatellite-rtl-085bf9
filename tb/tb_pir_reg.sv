// tb_pir_reg -- checks the frequency truncation and PIR: without dither the
// PIR equals f_off + round(u_f / 2^(W-T)) modulo 2^T (exact halves follow
// the tie bit) two clocks later; with triangular dither the mean PIR equals
// f_off + u_f / 2^(W-T) for a fractional u_f.
module tb_pir_reg;
  localparam int W = 42, T = 12, TW = 33, S = W - T;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [W-1:0] u_f_i;
  logic [T-1:0] f_off, pir_o;
  logic signed [TW-1:0] dither;
  logic tie;
  int checks = 0, failures = 0;

  pir_reg #(.W(W), .T(T), .TW(TW)) dut (.clk, .rst_n, .u_f_i, .f_off, .dither, .tie, .pir_o);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_q [$];
    longint uf, q, e;
    real r, acc, target;
    u_f_i = '0; f_off = '0; dither = '0; tie = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      uf = longint'($signed(W'({$urandom, $urandom}))) >>> ($urandom % 12);
      if (n % 7 == 0) uf = (uf >>> S <<< S) + (64'sd1 <<< (S - 1));   // exact half
      u_f_i = W'(uf);
      f_off = T'($urandom);
      tie = 1'($urandom);
      r = real'(uf) / (2.0 ** S);
      q = longint'($floor(r));
      if (r - $floor(r) > 0.5) q++;
      else if (r - $floor(r) == 0.5) q += longint'(tie);
      if (q > 2047) q = 2047;
      exp_q.push_back(q);
      @(posedge clk); #1;
      if (exp_q.size() == 2) begin
        // the preset is added in the PIR register, one clock after rounding
        e = (exp_q.pop_front() + longint'(f_off)) & 64'hFFF;
        checks++;
        if (longint'(pir_o) != e) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d pir=%0d exp %0d", n, pir_o, e);
        end
      end
      @(negedge clk);
    end
    // dithered: mean PIR follows a fractional frequency
    f_off = 12'd307;
    u_f_i = W'(longint'(0.3 * 2.0 ** S));
    target = 307.3;
    repeat (4) @(posedge clk);
    acc = 0.0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      dither = TW'(longint'($urandom) - longint'($urandom));
      tie = 1'($urandom);
      acc += real'(pir_o);
    end
    checks++;
    if (acc / 20000.0 - target > 0.02 || target - acc / 20000.0 > 0.02) begin
      failures++;
      $display("FAIL mean PIR %f expected %f", acc / 20000.0, target);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
