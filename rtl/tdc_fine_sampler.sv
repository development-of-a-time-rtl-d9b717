// tdc_fine_sampler: the four sampling registers of the fine-time unit.
//
// The hit signal is the clock of four flip-flops whose data inputs are the
// four phases (0, 90, 180 and 270 degrees) of the 320 MHz clock. The rising
// edge of the hit therefore freezes the state of the four phases, q[3:0],
// which tells in which quarter of the 3.125 ns clock period the hit arrived.
// All four samples are taken in one clock domain, that of the hit, so no
// further synchronisation between them is needed.
//
// Interface: hit is the (asynchronous) hit signal; clk_0..clk_270 are the
// four 320 MHz phases; q[0] is the sample of clk_0, q[3] that of clk_270.
// Timing: q changes only at a rising edge of hit and holds until the next.
// The structure (hit clocks the registers, phases are data) follows the
// chip's design; the sampled registers carry no reset, as in a plain
// sampling flip-flop.
module tdc_fine_sampler (
  input  logic       hit,
  input  logic       clk_0,
  input  logic       clk_90,
  input  logic       clk_180,
  input  logic       clk_270,
  output logic [3:0] q
);

  always_ff @(posedge hit) begin
    q <= {clk_270, clk_180, clk_90, clk_0};
  end

endmodule
