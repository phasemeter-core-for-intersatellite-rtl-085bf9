// tb_pa_diff -- checks that each output is PA[k+1]-PA[0] modulo 2^T, read
// as signed, one clock after the inputs, for random accumulator values and
// for ramps that wrap around at different rates.
module tb_pa_diff;
  localparam int NC = 4, T = 12;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [T-1:0] pa_i [NC];
  logic signed [T-1:0] diff_o [NC-1];
  int checks = 0, failures = 0;

  pa_diff #(.NC(NC), .T(T)) dut (.clk, .rst_n, .pa_i, .diff_o);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    int ph [NC];
    for (int c = 0; c < NC; c++) begin pa_i[c] = '0; ph[c] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      for (int c = 0; c < NC; c++) begin
        if (n < 2000) pa_i[c] = T'($urandom);
        else begin
          // common ramp of 307 per sample plus small channel offsets
          ph[c] = (ph[c] + 307 + (c == 0 ? 0 : int'($urandom % 5) - 2)) % 4096;
          pa_i[c] = T'(ph[c]);
        end
      end
      @(posedge clk); #1;
      for (int c = 0; c < NC - 1; c++) begin
        e = (int'(pa_i[c+1]) - int'(pa_i[0]) + 8192) % 4096;
        if (e >= 2048) e -= 4096;
        checks++;
        if (int'(diff_o[c]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d c=%0d diff=%0d exp %0d", n, c, diff_o[c], e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
