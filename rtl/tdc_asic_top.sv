// tdc_asic_top: the 24-channel trigger-less TDC chip for drift-tube
// read-out, without its analog parts.
//
// Each channel takes the time-over-threshold pulse of one tube and times
// both of its edges with a resolution of a quarter of the 320 MHz clock
// period (781 ps) over 2^15 clock periods (102.4 us). One coarse-counter
// pair (CNT1 on the rising, CNT2 on the falling edge of the 0 degree clock)
// serves all 24 channels; each channel has a leading-edge and a
// trailing-edge slice. The channel logic forms 23-bit words (channel ID,
// edge flag, fine time, coarse time), buffers them per channel and sends
// them out on two serial ports of 12 channels each.
//
// Clocks: clk320_0/90/180/270 are the four phases of the 320 MHz clock and
// clk160 the 160 MHz logic clock, all from the on-chip PLL, which is not
// part of this RTL; the rising edges of clk160 must coincide with rising
// edges of clk320_0. rst is synchronous to clk160 and also resets the
// coarse counters; coarse count 0 is the 320 MHz period that starts at the
// last clk160 rising edge that samples rst high. hit[c] is the discriminated
// pulse of channel c (the differential receivers are not part of this
// RTL). sdo[p] are the two bits per clk160 cycle of port p for a
// double-data-rate output driver. mode, rate and ch_enable are the
// configuration, whose loading interface is not described and is therefore
// left outside. overflow, unpaired and fine_exception are per-channel
// one-cycle status pulses.
module tdc_asic_top #(
  parameter int unsigned N_CH        = tdc_pkg::N_CH,
  parameter int unsigned CH_PER_PORT = tdc_pkg::CH_PER_PORT,
  parameter int unsigned FIFO_DEPTH  = tdc_pkg::FIFO_DEPTH,
  localparam int unsigned N_PORTS    = N_CH / CH_PER_PORT
) (
  input  logic [N_CH-1:0]         hit,
  input  logic                    clk320_0,
  input  logic                    clk320_90,
  input  logic                    clk320_180,
  input  logic                    clk320_270,
  input  logic                    clk160,
  input  logic                    rst,
  input  tdc_pkg::tdc_mode_t      mode,
  input  tdc_pkg::tdc_rate_t      rate,
  input  logic [N_CH-1:0]         ch_enable,
  output logic [N_PORTS-1:0][1:0] sdo,
  output logic [N_CH-1:0]         overflow,
  output logic [N_CH-1:0]         unpaired,
  output logic [N_CH-1:0]         fine_exception
);
  import tdc_pkg::*;

  logic [COARSE_W-1:0] cnt1, cnt2;

  logic [N_CH-1:0]                lead_valid, trail_valid;
  logic [N_CH-1:0][COARSE_W-1:0]  lead_coarse, trail_coarse;
  logic [N_CH-1:0][FINE_W-1:0]    lead_fine, trail_fine;
  logic [N_CH-1:0]                lead_exc, trail_exc;

  tdc_coarse_counter #(.W(COARSE_W)) u_cnt (
    .clk_0(clk320_0), .rst, .cnt1, .cnt2
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    tdc_channel #(.COARSE_W(COARSE_W)) u_chan (
      .hit            (hit[c]),
      .clk_0          (clk320_0),
      .clk_90         (clk320_90),
      .clk_180        (clk320_180),
      .clk_270        (clk320_270),
      .cnt1, .cnt2,
      .clk            (clk160),
      .rst,
      .lead_valid     (lead_valid[c]),
      .lead_coarse    (lead_coarse[c]),
      .lead_fine      (lead_fine[c]),
      .lead_exception (lead_exc[c]),
      .trail_valid    (trail_valid[c]),
      .trail_coarse   (trail_coarse[c]),
      .trail_fine     (trail_fine[c]),
      .trail_exception(trail_exc[c])
    );
  end

  assign fine_exception = (lead_valid & lead_exc) | (trail_valid & trail_exc);

  tdc_channel_logic #(
    .N_CH(N_CH), .CH_PER_PORT(CH_PER_PORT), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_logic (
    .clk(clk160), .rst, .mode, .rate, .ch_enable,
    .lead_valid, .lead_coarse, .lead_fine,
    .trail_valid, .trail_coarse, .trail_fine,
    .sdo, .overflow, .unpaired
  );

endmodule
