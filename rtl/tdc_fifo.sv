// tdc_fifo: the buffer of one channel, a synchronous first-in first-out
// memory.
//
// DEPTH words of WIDTH bits in a register array, a write and a read
// pointer that wrap at DEPTH, and a count of the stored words. The oldest word is always visible on rd_data (first-word
// fall-through); rd_en removes it. A write and a read in the same cycle are
// both done, also when the FIFO is full. Writing a full FIFO or reading an
// empty one is ignored and flagged by an assertion.
//
// That each channel has a FIFO of its own follows the chip; its depth (8),
// the fall-through read and the reset are choices of this design, since the
// paper gives none of them.
module tdc_fifo #(
  parameter int unsigned WIDTH = tdc_pkg::WORD_W,
  parameter int unsigned DEPTH = tdc_pkg::FIFO_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) begin
        mem[wp] <= wr_data;
        wp      <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (do_rd) begin
        rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      end
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst)
                                  !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst)
                                   !(rd_en && empty));

endmodule
