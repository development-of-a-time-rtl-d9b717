// tdc_readout_arbiter: reads the FIFOs of one output port by priority
// encoding of their status.
//
// Each cycle in which the output register is free (empty, or its word is
// being taken by the serializer), the lowest-numbered FIFO that is not
// empty is popped and its word is loaded into the output register. With
// N = 12 FIFOs, channel 0 of the port has the highest priority. The
// hand-shake to the serializer is valid/ready: a word moves when out_valid
// and out_ready are both high, and out_word does not change while out_valid
// is high and out_ready is low (checked by an assertion).
//
// Priority read-out of the FIFO status follows the chip; a fixed priority,
// lowest index first, and the registered valid/ready output are this
// design's reading of it.
module tdc_readout_arbiter #(
  parameter int unsigned N = tdc_pkg::CH_PER_PORT
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [N-1:0]               fifo_empty,
  input  tdc_pkg::tdc_word_t [N-1:0] fifo_data,
  output logic [N-1:0]               fifo_rd,
  output tdc_pkg::tdc_word_t         out_word,
  output logic                       out_valid,
  input  logic                       out_ready
);

  logic                 load, any;
  logic [$clog2(N)-1:0] sel;

  // priority encoder: lowest index that is not empty
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!fifo_empty[i]) begin
        any = 1'b1;
        sel = ($clog2(N))'(i);
      end
    end
  end

  assign load    = any && (!out_valid || out_ready);
  assign fifo_rd = load ? (N'(1) << sel) : '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
    end else if (load) begin
      out_valid <= 1'b1;
      out_word  <= fifo_data[sel];
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
                           out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
