// tdc_slice: one rising-edge TDC, fine-time and coarse-time units together,
// with the hand-over of its result to the logic clock.
//
// On a rising edge of hit the fine sampler freezes the four 320 MHz phases
// and the coarse capture freezes both coarse counters. The encoder and the
// counter selection turn these into a 17-bit time {coarse, fine} that stays
// put until the next hit. A toggle flip-flop, also clocked by hit, tells the
// logic clock domain that a new time is there: it is passed through two
// synchronising flip-flops, and a change of the synchronised value loads
// the time into an output register and pulses 'valid' for one clk cycle.
// The fine and coarse units follow the chip; the toggle hand-over is this
// design's choice, since the paper does not describe how the times enter
// the channel logic.
//
// Timing: valid rises 3 to 4 clk cycles after the hit edge. Two hits to the
// same slice must be more than 4 clk cycles apart (25 ns at 160 MHz), or the
// second one overwrites the first before it is read. rst (synchronous to
// clk) only resynchronises the hand-over; nothing in the hit domain is
// reset.
module tdc_slice #(
  parameter int unsigned COARSE_W = tdc_pkg::COARSE_W
) (
  input  logic                       hit,
  input  logic                       clk_0,
  input  logic                       clk_90,
  input  logic                       clk_180,
  input  logic                       clk_270,
  input  logic [COARSE_W-1:0]        cnt1,
  input  logic [COARSE_W-1:0]        cnt2,
  input  logic                       clk,
  input  logic                       rst,
  output logic                       valid,
  output logic [COARSE_W-1:0]        coarse,
  output logic [tdc_pkg::FINE_W-1:0] fine,
  output logic                       exception   // q[3:0] needed correcting
);

  logic [3:0]                 q;
  logic [tdc_pkg::FINE_W-1:0] fine_h;
  logic [COARSE_W-1:0]        coarse_h;
  logic                       exc_h, inv_h;
  logic                       tog_h;
  logic [2:0]                 tog_s;   // two synchroniser stages + last value

  tdc_fine_sampler u_fine (
    .hit, .clk_0, .clk_90, .clk_180, .clk_270, .q
  );

  tdc_fine_encoder u_enc (
    .q, .fine(fine_h), .exception(exc_h), .invalid(inv_h)
  );

  tdc_coarse_capture #(.W(COARSE_W)) u_coarse (
    .hit, .cnt1, .cnt2, .fine(fine_h), .coarse(coarse_h)
  );

  // Hit-domain event flag.
  always_ff @(posedge hit) begin
    tog_h <= ~tog_h;
  end

  always_ff @(posedge clk) begin
    tog_s[0] <= tog_h;
    tog_s[1] <= tog_s[0];
    tog_s[2] <= tog_s[1];
    valid    <= 1'b0;
    if (rst) begin
      tog_s[2] <= tog_s[1];
    end else if (tog_s[2] != tog_s[1]) begin
      valid     <= 1'b1;
      coarse    <= coarse_h;
      fine      <= fine_h;
      exception <= exc_h | inv_h;
    end
  end

endmodule
