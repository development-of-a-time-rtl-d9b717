// tdc_edge_pairing: per-channel logic between the two slices of a channel
// and the channel's FIFO; builds output words and pairs edges.
//
// Each slice result is first held in a one-entry pending register. Words
// are written to the FIFO one per clk cycle, in the format of the chip:
// channel ID, leading/trailing flag, fine time, coarse time. When both
// pending registers are full, the edge that arrived first is handled first
// (the leading one if they came in the same cycle).
//   MODE_EDGE: every edge becomes a word.
//   MODE_PAIR: a leading edge is held until the trailing edge of the same
//              pulse arrives; the pair is then written as two consecutive
//              FIFO words, leading first. A trailing edge with no held
//              leading edge, or a held leading edge replaced by a newer one,
//              is dropped and pulses 'unpaired'.
// A word waits in its pending register while the FIFO is full. An edge that
// arrives while its pending register is still occupied is lost and pulses
// 'overflow'. A disabled channel ignores its slices.
//
// The paper names edge pairing as a task of the channel logic, selected by
// the operation mode, but gives no further detail: the rules above, the
// pending registers and the overflow/unpaired flags are this design's own.
module tdc_edge_pairing #(
  parameter logic [tdc_pkg::CHID_W-1:0] CHID = '0
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         enable,
  input  tdc_pkg::tdc_mode_t           mode,
  input  logic                         lead_valid,
  input  logic [tdc_pkg::COARSE_W-1:0] lead_coarse,
  input  logic [tdc_pkg::FINE_W-1:0]   lead_fine,
  input  logic                         trail_valid,
  input  logic [tdc_pkg::COARSE_W-1:0] trail_coarse,
  input  logic [tdc_pkg::FINE_W-1:0]   trail_fine,
  input  logic                         fifo_full,
  output logic                         wr_en,
  output tdc_pkg::tdc_word_t           wr_data,
  output logic                         overflow,
  output logic                         unpaired
);
  import tdc_pkg::*;

  logic      pend_l_v, pend_t_v, held_v, send_t_v;
  logic      t_first;              // pend_t arrived before pend_l
  logic      t_older;              // pend_t is the older pending edge
  tdc_time_t pend_l, pend_t, held, send_t;

  // What the control decides this cycle.
  logic      take_l, take_t;       // pending register emptied
  logic      hold_l;               // pend_l moves to held (pair mode)
  logic      pair;                 // held + pend_t become a pair
  logic      drop;                 // an edge is dropped as unpaired

  function automatic tdc_word_t mk_word(edge_t e, tdc_time_t t);
    tdc_word_t w;
    w.chid      = CHID;
    w.edge_kind = e;
    w.fine      = t.fine;
    w.coarse    = t.coarse;
    return w;
  endfunction

  assign t_older = pend_t_v && (!pend_l_v || t_first);

  always_comb begin
    take_l  = 1'b0;
    take_t  = 1'b0;
    hold_l  = 1'b0;
    pair    = 1'b0;
    drop    = 1'b0;
    wr_en   = 1'b0;
    wr_data = mk_word(EDGE_LEADING, pend_l);
    if (mode == MODE_EDGE) begin
      if (!fifo_full && pend_l_v && !t_older) begin
        take_l = 1'b1;
        wr_en  = 1'b1;
      end else if (!fifo_full && pend_t_v) begin
        take_t  = 1'b1;
        wr_en   = 1'b1;
        wr_data = mk_word(EDGE_TRAILING, pend_t);
      end
    end else begin
      if (send_t_v) begin
        if (!fifo_full) begin
          wr_en   = 1'b1;
          wr_data = mk_word(EDGE_TRAILING, send_t);
        end
      end else if (t_older && held_v) begin
        if (!fifo_full) begin
          pair    = 1'b1;
          take_t  = 1'b1;
          wr_en   = 1'b1;
          wr_data = mk_word(EDGE_LEADING, held);
        end
      end else if (pend_l_v && !t_older) begin
        take_l = 1'b1;
        hold_l = 1'b1;
        drop   = held_v;
      end else if (t_older) begin
        take_t = 1'b1;
        drop   = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    overflow <= 1'b0;
    unpaired <= drop;
    if (rst) begin
      pend_l_v <= 1'b0;
      pend_t_v <= 1'b0;
      held_v   <= 1'b0;
      send_t_v <= 1'b0;
      unpaired <= 1'b0;
    end else begin
      // pending registers
      if (take_l) pend_l_v <= 1'b0;
      if (take_t) pend_t_v <= 1'b0;
      if (enable && lead_valid) begin
        if (pend_l_v && !take_l) overflow <= 1'b1;
        else begin
          pend_l_v <= 1'b1;
          pend_l   <= '{coarse: lead_coarse, fine: lead_fine};
        end
      end
      if (enable && trail_valid) begin
        if (pend_t_v && !take_t) overflow <= 1'b1;
        else begin
          pend_t_v <= 1'b1;
          pend_t   <= '{coarse: trail_coarse, fine: trail_fine};
        end
      end
      // age of the two pending edges; a tie counts the leading edge older
      if (enable && lead_valid && (!pend_l_v || take_l))
        t_first <= pend_t_v && !take_t;
      else if (enable && trail_valid && (!pend_t_v || take_t))
        t_first <= 1'b0;
      // pairing state
      if (mode == MODE_EDGE) begin
        held_v   <= 1'b0;
        send_t_v <= 1'b0;
      end else begin
        if (send_t_v && !fifo_full) send_t_v <= 1'b0;
        if (pair) begin
          held_v   <= 1'b0;
          send_t_v <= 1'b1;
          send_t   <= pend_t;
        end
        if (hold_l) begin
          held_v <= 1'b1;
          held   <= pend_l;
        end
      end
    end
  end

endmodule
