// tdc_deser: receiver for one serial output port, for testbenches.
//
// Takes the two bits per 160 MHz cycle of a port (sdo[1] first), one of
// them at 160 Mbps or both at 320 Mbps, waits for a '1' start bit and
// collects the WORD_W bits that follow, most significant first. Each
// complete word is given on word with a one-cycle word_valid pulse.
module tdc_deser #(
  parameter int unsigned WORD_W = 23
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              rate320,
  input  logic [1:0]        sdo,
  output logic              word_valid,
  output logic [WORD_W-1:0] word
);

  logic [WORD_W-1:0] sh;
  int                nbits;   // -1: idle, else bits collected

  always_ff @(posedge clk) begin
    automatic int          n  = nbits;
    automatic logic [WORD_W-1:0] s = sh;
    automatic logic [1:0]  b  = sdo;
    word_valid <= 1'b0;
    if (rst) begin
      nbits <= -1;
    end else begin
      for (int i = 0; i < (rate320 ? 2 : 1); i++) begin
        if (n < 0) begin
          if (b[1]) n = 0;
        end else begin
          s = {s[WORD_W-2:0], b[1]};
          n++;
          if (n == WORD_W) begin
            word_valid <= 1'b1;
            word       <= s;
            n = -1;
          end
        end
        b = {b[0], 1'b0};
      end
      nbits <= n;
      sh    <= s;
    end
  end


endmodule
