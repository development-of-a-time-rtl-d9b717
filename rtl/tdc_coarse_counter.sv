// tdc_coarse_counter: the two coarse-time counters.
//
// CNT1 counts on the rising and CNT2 on the falling edge of the 0 degree
// 320 MHz clock (the falling edge stands for the inverted clock of the
// chip). After a reset both hold 0; CNT2 then steps first, at the next
// falling edge, and CNT1 follows half a period later, so CNT2 runs half a
// clock period ahead of CNT1. During the high half of period k both read k;
// during the low half CNT2 already reads k+1 while CNT1 still reads k. Each
// counter is therefore stable while the other one switches, which lets a
// hit pick a counter away from its transition (see tdc_coarse_capture).
//
// Interface: clk_0 is the 0 degree 320 MHz clock; rst is a synchronous
// counter reset that must change just after a rising edge of clk_0 (it is
// sampled by both edges). Counters wrap at 2^W (102.4 us at W = 15). The
// counter reset is a choice of this design; the paper does not say how the
// counters are started.
module tdc_coarse_counter #(
  parameter int unsigned W = tdc_pkg::COARSE_W
) (
  input  logic         clk_0,
  input  logic         rst,
  output logic [W-1:0] cnt1,
  output logic [W-1:0] cnt2
);

  always_ff @(posedge clk_0) begin
    if (rst) cnt1 <= '0;
    else     cnt1 <= cnt1 + 1'b1;
  end

  always_ff @(negedge clk_0) begin
    if (rst) cnt2 <= '0;
    else     cnt2 <= cnt2 + 1'b1;
  end

endmodule
