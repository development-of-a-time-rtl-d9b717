// tdc_clkgen: clock source for the TDC testbenches, standing in for the
// on-chip PLL.
//
// Makes the four phases of a 320 MHz clock (period 3125 ps, phases 781.25 ps
// apart) and the 160 MHz logic clock. The first rising edge of clk_0 and
// clk160 is at T0_PS; every rising edge of clk160 coincides with one of
// clk_0. SKEW180_PS shifts both edges of clk_180 in time (negative is
// earlier), which makes the 0/180 pair not exactly complementary, the
// imperfection that produces the corrected fine-time codes.
`timescale 1ps/10fs
module tdc_clkgen #(
  parameter real T0_PS      = 10000.0,
  parameter real SKEW180_PS = 0.0
) (
  output logic clk_0,
  output logic clk_90,
  output logic clk_180,
  output logic clk_270,
  output logic clk160
);

  localparam real HALF = 1562.5;

  initial begin
    clk_0 = 1'b0;
    #(T0_PS);
    forever begin clk_0 = 1'b1; #(HALF); clk_0 = 1'b0; #(HALF); end
  end

  initial begin
    clk_90 = 1'b0;
    #(T0_PS + HALF / 2.0);
    forever begin clk_90 = 1'b1; #(HALF); clk_90 = 1'b0; #(HALF); end
  end

  initial begin
    clk_180 = 1'b1;
    #(T0_PS + SKEW180_PS);
    forever begin clk_180 = 1'b0; #(HALF); clk_180 = 1'b1; #(HALF); end
  end

  initial begin
    clk_270 = 1'b1;
    #(T0_PS + HALF / 2.0);
    forever begin clk_270 = 1'b0; #(HALF); clk_270 = 1'b1; #(HALF); end
  end

  initial begin
    clk160 = 1'b0;
    #(T0_PS);
    forever begin clk160 = 1'b1; #(2.0 * HALF); clk160 = 1'b0; #(2.0 * HALF); end
  end

endmodule
