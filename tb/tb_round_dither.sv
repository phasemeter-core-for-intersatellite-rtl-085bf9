// tb_round_dither -- checks the dithered rounding block: exact results
// against a real-valued reference for random inputs, dither and tie bits,
// saturation at both ends, wrap-around in the modulo variant, the one-clock
// latency, and that the mean of the dithered output equals the input
// (offset-free) for fractional inputs.
module tb_round_dither;
  localparam int WI = 20, WO = 12, S = WI - WO, TW = 33;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [WI-1:0] x, xw;
  logic signed [TW-1:0] dither;
  logic tie;
  logic signed [WO-1:0] y, yw;
  int checks = 0, failures = 0;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  round_dither #(.WI(WI), .WO(WO), .SAT(1'b1), .TW(TW)) dut  (.clk, .rst_n, .x, .dither, .tie, .y);
  round_dither #(.WI(WI), .WO(WO), .SAT(1'b0), .TW(TW)) dutw (.clk, .rst_n, .x(xw), .dither, .tie, .y(yw));

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_round(longint xv, longint dv, bit t, bit sat);
    real r, fl, fr;
    longint q;
    r  = (real'(xv) + $floor(real'(dv) / (2.0 ** (TW - 1 - S)) + 0.5)) / (2.0 ** S);
    fl = $floor(r);
    fr = r - fl;
    q  = longint'(fl);
    if (fr > 0.5) q++;
    else if (fr == 0.5) q += longint'(t);
    if (sat) begin
      if (q > (1 <<< (WO - 1)) - 1) q = (1 <<< (WO - 1)) - 1;
      if (q < -(1 <<< (WO - 1))) q = -(1 <<< (WO - 1));
    end else begin
      q = q & ((1 <<< WO) - 1);
      if (q >= (1 <<< (WO - 1))) q -= (1 <<< WO);
    end
    return q;
  endfunction

  task automatic apply(longint xv, longint dv, bit t);
    longint e, ew;
    x = WI'(xv); xw = WI'(xv); dither = TW'(dv); tie = t;
    e  = ref_round(xv, dv, t, 1'b1);
    ew = ref_round(xv, dv, t, 1'b0);
    @(posedge clk); #1;
    checks++;
    if (longint'(y) != e || longint'(yw) != ew) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d d=%0d t=%0d: y=%0d exp %0d, wrap %0d exp %0d", xv, dv, t, y, e, yw, ew);
    end
  endtask

  initial begin
    real acc;
    longint xv;
    x = '0; xw = '0; dither = '0; tie = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // exact ties, both directions, no dither
    apply(128, 0, 1'b0);
    apply(128, 0, 1'b1);
    apply(-128, 0, 1'b0);
    apply(-128, 0, 1'b1);
    apply(129, 0, 1'b0);
    apply(-129, 0, 1'b1);
    // saturation and wrap at the top and bottom
    apply((1 <<< (WI - 1)) - 1, 0, 1'b1);
    apply(-(1 <<< (WI - 1)), -(64'sd1 <<< (TW - 1)), 1'b0);
    // random words
    for (int n = 0; n < 5000; n++) begin
      apply(longint'($signed(WI'($urandom))),
            longint'($signed(TW'({$urandom, $urandom}))) % (64'sd1 <<< (TW - 1)),
            1'($urandom));
    end
    // offset-free: mean of the dithered output equals x/2^S
    for (int f = 0; f < 4; f++) begin
      xv = 1000 * 256 + f * 37 - 500;
      acc = 0.0;
      x = WI'(xv);
      for (int n = 0; n < 20000; n++) begin
        dither = TW'(longint'($urandom) - longint'($urandom));
        tie = 1'($urandom);
        @(posedge clk); #1;
        acc += real'(y);
      end
      checks++;
      if (fabs(acc / 20000.0 - real'(xv) / 256.0) > 0.02) begin
        failures++;
        $display("FAIL mean %f for x/2^S=%f", acc / 20000.0, real'(xv) / 256.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
