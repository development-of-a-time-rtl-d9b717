// tdc_fine_encoder: corrects and encodes the four phase samples q[3:0]
// into the 2-bit fine time.
//
// With ideal clocks only four codes occur: 1001 (fine 0), 0011 (1),
// 0110 (2) and 1100 (3), written q[3:0]. Metastability of the sampling
// registers, or 0/180 and 90/270 pairs that are not exactly complementary,
// give eight further codes near each edge; at every edge two of the four
// samples are stable and the code is corrected from them. The table is the
// chip's correction table:
//   1001, 1101, 1000 -> 0      0011, 1011, 0001 -> 1
//   0110, 0010, 0111 -> 2      1100, 0100, 1110 -> 3
// The four remaining codes, 0000, 0101, 1010 and 1111, cannot occur since
// q0/q2 and q1/q3 are sampled from opposite phases. This design encodes them
// as 0 and raises 'invalid'; 'exception' marks the eight corrected codes.
// Purely combinational.
module tdc_fine_encoder (
  input  logic                     [3:0] q,
  output logic [tdc_pkg::FINE_W-1:0]     fine,
  output logic                           exception,
  output logic                           invalid
);

  always_comb begin
    exception = 1'b0;
    invalid   = 1'b0;
    unique case (q)
      4'b1001:                   fine = 2'd0;
      4'b1101, 4'b1000: begin    fine = 2'd0; exception = 1'b1; end
      4'b0011:                   fine = 2'd1;
      4'b1011, 4'b0001: begin    fine = 2'd1; exception = 1'b1; end
      4'b0110:                   fine = 2'd2;
      4'b0010, 4'b0111: begin    fine = 2'd2; exception = 1'b1; end
      4'b1100:                   fine = 2'd3;
      4'b0100, 4'b1110: begin    fine = 2'd3; exception = 1'b1; end
      default: begin             fine = 2'd0; invalid   = 1'b1; end
    endcase
  end

endmodule
