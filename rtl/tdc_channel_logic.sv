// tdc_channel_logic: the logic part of the chip, from the slice results of
// all channels to the two serial output ports.
//
// For every channel c an edge-pairing unit turns the leading and trailing
// times into words with channel ID c and writes them into the channel's own
// FIFO. The channels are split into groups of CH_PER_PORT (12 of the 24);
// each group has a priority read-out arbiter and a serializer driving one
// output port. Channel c belongs to port c / CH_PER_PORT. mode selects
// edge or pair mode for all channels, rate selects 160 or 320 Mbps for both
// ports and ch_enable switches single channels on.
//
// All of it runs on the 160 MHz logic clock with a synchronous reset. The
// split into per-channel FIFOs, priority read-out and two ports of 12
// channels follows the chip; the units inside are described in their own
// files. The chip's time calibration is not included, its function not
// being known.
module tdc_channel_logic #(
  parameter int unsigned N_CH        = tdc_pkg::N_CH,
  parameter int unsigned CH_PER_PORT = tdc_pkg::CH_PER_PORT,
  parameter int unsigned FIFO_DEPTH  = tdc_pkg::FIFO_DEPTH,
  localparam int unsigned N_PORTS    = N_CH / CH_PER_PORT
) (
  input  logic                                    clk,
  input  logic                                    rst,
  input  tdc_pkg::tdc_mode_t                      mode,
  input  tdc_pkg::tdc_rate_t                      rate,
  input  logic [N_CH-1:0]                         ch_enable,
  input  logic [N_CH-1:0]                         lead_valid,
  input  logic [N_CH-1:0][tdc_pkg::COARSE_W-1:0]  lead_coarse,
  input  logic [N_CH-1:0][tdc_pkg::FINE_W-1:0]    lead_fine,
  input  logic [N_CH-1:0]                         trail_valid,
  input  logic [N_CH-1:0][tdc_pkg::COARSE_W-1:0]  trail_coarse,
  input  logic [N_CH-1:0][tdc_pkg::FINE_W-1:0]    trail_fine,
  output logic [N_PORTS-1:0][1:0]                 sdo,
  output logic [N_CH-1:0]                         overflow,
  output logic [N_CH-1:0]                         unpaired
);
  import tdc_pkg::*;

  logic      [N_CH-1:0] wr_en, fifo_full, fifo_empty, fifo_rd;
  tdc_word_t [N_CH-1:0] wr_data, fifo_data;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    tdc_edge_pairing #(.CHID(CHID_W'(c))) u_pair (
      .clk, .rst,
      .enable      (ch_enable[c]),
      .mode,
      .lead_valid  (lead_valid[c]),
      .lead_coarse (lead_coarse[c]),
      .lead_fine   (lead_fine[c]),
      .trail_valid (trail_valid[c]),
      .trail_coarse(trail_coarse[c]),
      .trail_fine  (trail_fine[c]),
      .fifo_full   (fifo_full[c]),
      .wr_en       (wr_en[c]),
      .wr_data     (wr_data[c]),
      .overflow    (overflow[c]),
      .unpaired    (unpaired[c])
    );

    tdc_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst,
      .wr_en  (wr_en[c]),
      .wr_data(wr_data[c]),
      .rd_en  (fifo_rd[c]),
      .rd_data(fifo_data[c]),
      .full   (fifo_full[c]),
      .empty  (fifo_empty[c]),
      .count  ()
    );
  end

  for (genvar p = 0; p < N_PORTS; p++) begin : g_port
    localparam int unsigned LO = p * CH_PER_PORT;
    tdc_word_t out_word;
    logic      out_valid, out_ready;

    tdc_readout_arbiter #(.N(CH_PER_PORT)) u_arb (
      .clk, .rst,
      .fifo_empty(fifo_empty[LO +: CH_PER_PORT]),
      .fifo_data (fifo_data[LO +: CH_PER_PORT]),
      .fifo_rd   (fifo_rd[LO +: CH_PER_PORT]),
      .out_word, .out_valid, .out_ready
    );

    tdc_serializer #(.WORD_W(WORD_W)) u_ser (
      .clk, .rst, .rate,
      .in_valid(out_valid),
      .in_word (out_word),
      .in_ready(out_ready),
      .sdo     (sdo[p])
    );
  end

endmodule
