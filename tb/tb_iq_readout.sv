// tb_iq_readout -- checks the CORDIC IQ readout: phase against
// atan2(Q, I)/(2 pi) and magnitude against sqrt(I^2+Q^2) for random vectors
// in all four quadrants, and the latency of ITER+2 clocks from start to done.
module tb_iq_readout;
  localparam int W = 32, PH = 24, ITER = 20;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start;
  logic signed [W-1:0] i_i, q_i;
  logic busy, done;
  logic signed [PH-1:0] phase_o;
  logic [W-1:0] mag_o;
  int checks = 0, failures = 0;

  iq_readout #(.W(W), .PH(PH), .ITER(ITER)) dut (.clk, .rst_n, .start, .i_i, .q_i, .busy, .done, .phase_o, .mag_o);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real iv, qv, ph_e, mag_e, ph_g, dph;
    int lat;
    start = 1'b0; i_i = '0; q_i = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      iv = real'($signed($urandom)) / 2.0;
      qv = real'($signed($urandom)) / 2.0;
      if (n % 10 == 0) qv = qv / 1.0e4;   // small residual phase, the usual case
      i_i = W'(longint'(iv)); q_i = W'(longint'(qv));
      iv = real'(i_i); qv = real'(q_i);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      ph_e  = $atan2(qv, iv) / (2.0 * 3.14159265358979) * (2.0 ** PH);
      mag_e = $sqrt(iv * iv + qv * qv);
      ph_g  = real'(phase_o);
      dph   = ph_g - ph_e;
      if (dph > 2.0 ** (PH - 1)) dph -= 2.0 ** PH;
      if (dph < -(2.0 ** (PH - 1))) dph += 2.0 ** PH;
      checks++;
      if (dph > 40.0 || dph < -40.0) begin
        failures++;
        if (failures < 10) $display("FAIL phase %f exp %f (I=%f Q=%f)", ph_g, ph_e, iv, qv);
      end
      checks++;
      if (real'(mag_o) - mag_e > 1.0e-5 * mag_e + 8.0 || mag_e - real'(mag_o) > 1.0e-5 * mag_e + 8.0) begin
        failures++;
        if (failures < 10) $display("FAIL mag %0d exp %f", mag_o, mag_e);
      end
      checks++;
      if (lat != ITER + 2) begin
        failures++;
        if (failures < 10) $display("FAIL latency %0d", lat);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
