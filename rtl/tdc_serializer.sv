// tdc_serializer: sends the words of one output port as a serial bit
// stream at 160 or 320 Mbps.
//
// A word is framed by one start bit, '1', in front of its WORD_W bits, which
// follow most significant bit first; the line is '0' while idle. The
// serializer runs on the 160 MHz logic clock and gives two bits per cycle on
// sdo[1:0]: sdo[1] is sent in the first and sdo[0] in the second half of
// the cycle by a double-data-rate output cell. At RATE_320 these are two
// successive bits of the frame; at RATE_160 both carry the same bit, which
// is then sent for a whole cycle. A 24-bit frame takes 12 cycles at 320 Mbps
// and 24 cycles at 160 Mbps. The next word is taken (in_ready high) in the
// last cycle of a frame, so frames follow each other without gaps.
//
// The two rates and the 320 Mbps output lines follow the chip; the framing
// and the double-data-rate scheme on the 160 MHz clock are this design's
// choices, the paper giving neither.
module tdc_serializer #(
  parameter int unsigned WORD_W = tdc_pkg::WORD_W
) (
  input  logic               clk,
  input  logic               rst,
  input  tdc_pkg::tdc_rate_t rate,
  input  logic               in_valid,
  input  logic [WORD_W-1:0]  in_word,
  output logic               in_ready,
  output logic [1:0]         sdo
);
  import tdc_pkg::*;

  localparam int unsigned FRAME_W = WORD_W + 1;
  localparam int unsigned BW      = $clog2(FRAME_W + 1);

  logic [FRAME_W-1:0] shreg;
  logic [BW-1:0]      bits_left;
  logic [BW-1:0]      step;

  assign step     = (rate == RATE_320) ? BW'(2) : BW'(1);
  assign in_ready = (bits_left <= step);

  always_comb begin
    if (bits_left == '0)       sdo = 2'b00;
    else if (rate == RATE_160) sdo = {2{shreg[FRAME_W-1]}};
    else if (bits_left == 1)   sdo = {shreg[FRAME_W-1], 1'b0};
    else                       sdo = shreg[FRAME_W-1 -: 2];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      bits_left <= '0;
      shreg     <= '0;
    end else if (in_valid && in_ready) begin
      shreg     <= {1'b1, in_word};
      bits_left <= BW'(FRAME_W);
    end else if (bits_left != '0) begin
      shreg     <= (rate == RATE_320) ? shreg << 2 : shreg << 1;
      bits_left <= (bits_left <= step) ? '0 : bits_left - step;
    end
  end

endmodule
