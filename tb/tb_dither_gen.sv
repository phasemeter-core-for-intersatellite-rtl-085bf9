// tb_dither_gen -- checks the triangular dither source against a bit-serial
// model of its two LFSRs, sample by sample, and checks the statistics of the output: range,
// zero mean and the triangular shape (75 % of samples within half range).
module tb_dither_gen;
  localparam int unsigned DW = 32;
  localparam int NSAMP = 20000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [DW:0] tri_o;
  logic tie_o;
  int checks = 0, failures = 0;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  dither_gen #(.DW(DW)) dut (.clk, .rst_n, .tri_o, .tie_o);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit-serial reference: one LFSR step at a time
  logic [40:0] ma;
  logic [46:0] mb;
  task automatic model_step();
    for (int s = 0; s < int'(DW); s++) begin
      ma = {ma[39:0], ma[40] ^ ma[37]};
      mb = {mb[45:0], mb[46] ^ mb[41]};
    end
  endtask

  initial begin
    longint exp_tri;
    logic   exp_tie;
    real    sum, frac_in;
    int     inner, mism, tie_ones;
    longint maxabs;
    ma = 41'h0_1234_5678_9;
    mb = 47'h0_7654_3210_FED;
    sum = 0.0; inner = 0; mism = 0; maxabs = 0; tie_ones = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NSAMP; n++) begin
      @(posedge clk); #1;
      model_step();
      exp_tri = longint'(ma[DW-1:0]) - longint'(mb[DW-1:0]);
      exp_tie = ma[DW] ^ mb[DW];
      checks++;
      if (longint'(tri_o) != exp_tri || tie_o != exp_tie) begin
        failures++;
        mism++;
        if (mism < 3) $display("FAIL n=%0d tri=%0d exp=%0d", n, tri_o, exp_tri);
      end
      sum += real'(tri_o);
      if ((tri_o < 0 ? -longint'(tri_o) : longint'(tri_o)) < (64'sd1 <<< (DW - 1))) inner++;
      if ((tri_o < 0 ? -longint'(tri_o) : longint'(tri_o)) > maxabs)
        maxabs = (tri_o < 0 ? -longint'(tri_o) : longint'(tri_o));
      tie_ones += int'(tie_o);
    end
    if (mism != 0) $display("FAIL: %0d samples differ from the LFSR model", mism);
    checks++;
    if (maxabs >= (64'sd1 <<< DW)) begin failures++; $display("FAIL: range exceeded"); end
    checks++;
    if (fabs(sum / NSAMP) > 0.03 * (2.0 ** DW)) begin failures++; $display("FAIL: mean %f", sum / NSAMP); end
    frac_in = real'(inner) / NSAMP;
    checks++;
    if (frac_in < 0.73 || frac_in > 0.77) begin failures++; $display("FAIL: inner fraction %f, triangular needs 0.75", frac_in); end
    checks++;
    if (tie_ones < NSAMP * 45 / 100 || tie_ones > NSAMP * 55 / 100) begin failures++; $display("FAIL: tie bit ones %0d", tie_ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
