// tdc_channel: one drift-tube channel, two identical TDC slices.
//
// The leading slice times the rising edge of the time-over-threshold pulse;
// the trailing slice gets the inverted pulse and so times its falling edge.
// Because each edge has a slice of its own, the pulse width is not limited
// by the dead time of one slice. Both slices share the coarse counters and
// the four clock phases. Two slices per channel follow the chip; the
// inverter on the trailing input is the simplest way to make a rising-edge
// slice see the falling edge.
//
// Interface and timing: as tdc_slice, once for each edge. Each slice needs
// more than 4 clk cycles between its own edges; a leading and a trailing
// edge may be arbitrarily close.
module tdc_channel #(
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
  output logic                       lead_valid,
  output logic [COARSE_W-1:0]        lead_coarse,
  output logic [tdc_pkg::FINE_W-1:0] lead_fine,
  output logic                       lead_exception,
  output logic                       trail_valid,
  output logic [COARSE_W-1:0]        trail_coarse,
  output logic [tdc_pkg::FINE_W-1:0] trail_fine,
  output logic                       trail_exception
);

  logic hit_n;

  assign hit_n = ~hit;

  tdc_slice #(.COARSE_W(COARSE_W)) u_lead (
    .hit, .clk_0, .clk_90, .clk_180, .clk_270, .cnt1, .cnt2, .clk, .rst,
    .valid(lead_valid), .coarse(lead_coarse), .fine(lead_fine),
    .exception(lead_exception)
  );

  tdc_slice #(.COARSE_W(COARSE_W)) u_trail (
    .hit(hit_n), .clk_0, .clk_90, .clk_180, .clk_270, .cnt1, .cnt2, .clk, .rst,
    .valid(trail_valid), .coarse(trail_coarse), .fine(trail_fine),
    .exception(trail_exception)
  );

endmodule
