// tdc_coarse_capture: samples both coarse counters on a hit and selects the
// one that was not switching.
//
// The hit edge clocks two W-bit registers that take CNT1 and CNT2. A hit in
// fine bins 0 or 1 (0 degree clock high, just after its rising edge, where
// CNT1 switches) uses the CNT2 sample; a hit in bins 2 or 3 (clock low, just
// after the falling edge, where CNT2 switches) uses the CNT1 sample. Both
// choices give the same count k for a hit in period k. The selection rule
// is the chip's; the fine input must be the fine time of the same hit.
//
// Interface: hit clocks the sample registers; cnt1/cnt2 come from
// tdc_coarse_counter; fine is the encoded fine time of the hit; coarse is
// valid from the hit edge plus the encoder delay until the next hit.
module tdc_coarse_capture #(
  parameter int unsigned W = tdc_pkg::COARSE_W
) (
  input  logic                       hit,
  input  logic [W-1:0]               cnt1,
  input  logic [W-1:0]               cnt2,
  input  logic [tdc_pkg::FINE_W-1:0] fine,
  output logic [W-1:0]               coarse
);

  logic [W-1:0] s1, s2;

  always_ff @(posedge hit) begin
    s1 <= cnt1;
    s2 <= cnt2;
  end

  assign coarse = (fine < 2) ? s2 : s1;

endmodule
