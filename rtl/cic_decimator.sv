// cic_decimator -- cascaded integrator-comb decimation filter.
//
// ORDER integrators run at the input rate, then every 2^RLOG2 input samples
// the last integrator is passed through ORDER first differences (comb
// sections with a delay of one decimated sample). The result is the input
// summed through a (moving-sum)^ORDER filter, with notches at multiples of
// the output rate, the frequencies that would alias to DC. The gain is
// 2^(ORDER*RLOG2), so the output word, WI + ORDER*RLOG2 bits, holds the
// filtered input with no rounding, and its top WI bits are the mean value.
// Two's complement wrap-around in the integrators is harmless because the
// output width covers the full gain.
//
// The paper chooses CIC filters for decimation inside the FPGA; order 3 and
// a single stage decimating by 2^24 (80 MHz to 4.77 Hz) are this
// implementation's choices.
//
// Timing: one input per clock; out_valid pulses for one clock every 2^RLOG2
// clocks, with out_o registered and held until the next pulse.
module cic_decimator #(
  parameter int unsigned WI    = 16,
  parameter int unsigned ORDER = pm_pkg::CIC_ORDER,
  parameter int unsigned RLOG2 = pm_pkg::CIC_RLOG2,
  parameter int unsigned WO    = WI + ORDER * RLOG2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [WI-1:0] in_i,
  output logic signed [WO-1:0] out_o,
  output logic                 out_valid
);

  logic signed [WO-1:0] integ [ORDER];
  logic signed [WO-1:0] dly   [ORDER];
  logic signed [WO-1:0] comb  [ORDER+1];
  logic [RLOG2-1:0]     cnt;
  logic                 tick;

  assign tick = (cnt == '1);

  always_comb begin
    comb[0] = integ[ORDER-1];
    for (int k = 0; k < int'(ORDER); k++) begin
      comb[k+1] = comb[k] - dly[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(ORDER); k++) begin
        integ[k] <= '0;
        dly[k]   <= '0;
      end
      cnt       <= '0;
      out_o     <= '0;
      out_valid <= 1'b0;
    end else begin
      integ[0] <= integ[0] + WO'(in_i);
      for (int k = 1; k < int'(ORDER); k++) begin
        integ[k] <= integ[k] + integ[k-1];
      end
      cnt       <= cnt + 1'b1;
      out_valid <= tick;
      if (tick) begin
        for (int k = 0; k < int'(ORDER); k++) begin
          dly[k] <= comb[k];
        end
        out_o <= comb[ORDER];
      end
    end
  end

  initial begin
    assert (ORDER >= 1 && RLOG2 >= 1) else $error("cic_decimator: ORDER and RLOG2 must be at least 1");
  end

endmodule
