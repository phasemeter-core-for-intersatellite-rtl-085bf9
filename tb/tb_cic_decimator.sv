// tb_cic_decimator -- checks the CIC decimator against a direct model: the
// input passed ORDER times through a moving sum of length R and sampled
// every R inputs. Checks the output rate (one strobe every R clocks), the
// DC gain R^ORDER and exact agreement with the model on random data.
module tb_cic_decimator;
  localparam int WI = 16, ORDER = 3, RLOG2 = 4, R = 2 ** RLOG2;
  localparam int WO = WI + ORDER * RLOG2;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [WI-1:0] in_i;
  logic signed [WO-1:0] out_o;
  logic out_valid;
  int checks = 0, failures = 0;

  cic_decimator #(.WI(WI), .ORDER(ORDER), .RLOG2(RLOG2)) dut (.clk, .rst_n, .in_i, .out_o, .out_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint xs [$];      // input history, newest last

  // model output at sample index n: ORDER-fold moving sums of length R
  function automatic longint model_at(int n);
    longint acc [];
    // build the full response by convolution: h = box^ORDER
    acc = new[ORDER * (R - 1) + 1];
    foreach (acc[k]) acc[k] = 0;
    acc[0] = 1;
    for (int o = 0; o < ORDER; o++) begin
      longint nx [];
      nx = new[acc.size()];
      foreach (nx[k]) begin
        nx[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) nx[k] += acc[k - j];
      end
      acc = nx;
    end
    model_at = 0;
    foreach (acc[k]) if (n - k >= 0) model_at += acc[k] * xs[n - k];
  endfunction

  initial begin
    int nvalid, last_valid, first_off, nout;
    longint e;
    in_i = '0;
    nvalid = 0; last_valid = -1; first_off = -100; nout = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      if (n < 600) in_i = 16'sd1000;
      else in_i = WI'($urandom);
      xs.push_back(longint'(in_i));
      @(posedge clk); #1;
      if (out_valid) begin
        nvalid++;
        if (last_valid >= 0) begin
          checks++;
          if (n - last_valid != R) begin failures++; $display("FAIL strobe spacing %0d", n - last_valid); end
        end
        last_valid = n;
        // DC gain once the constant input filled the filter
        if (n > 200 && n < 580) begin
          checks++;
          if (longint'(out_o) != 1000 * longint'(R) ** ORDER) begin
            failures++; $display("FAIL DC output %0d", out_o);
          end
        end
        // find the model alignment once, then require it everywhere
        if (n >= 600 + ORDER * R && first_off == -100) begin
          for (int off = 0; off < 4; off++) if (model_at(n - off) == longint'(out_o)) first_off = off;
          checks++;
          if (first_off == -100) begin failures++; first_off = 0; $display("FAIL no model alignment"); end
        end else if (first_off != -100) begin
          e = model_at(n - first_off);
          checks++;
          if (longint'(out_o) != e) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d out=%0d exp %0d", n, out_o, e);
          end
        end
      end
      @(negedge clk);
    end
    checks++;
    if (nvalid < 3000 / R - 2) begin failures++; $display("FAIL only %0d outputs", nvalid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
