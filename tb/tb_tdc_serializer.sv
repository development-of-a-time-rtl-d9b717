// tb_tdc_serializer: random words through the serializer at 320 and then
// 160 Mbps, decoded by a separate receiver. Checks every word and the time a
// burst takes: 12 clock cycles per word at 320 Mbps, 24 at 160 Mbps, with
// no gaps between frames.
`timescale 1ns/1ps
module tb_tdc_serializer;
  import tdc_pkg::*;
  localparam int WW = 23;

  logic clk = 1'b0, rst = 1'b1;
  tdc_rate_t rate = RATE_320;
  logic in_valid = 1'b0, in_ready;
  logic [WW-1:0] in_word = '0, rx_word;
  logic [1:0] sdo;
  logic rx_valid;
  int checks = 0, failures = 0;
  logic [WW-1:0] sent [$];
  longint cyc = 0, first_cyc, last_cyc;
  int n_rx = 0;

  always #3.125 clk = ~clk;
  always @(posedge clk) cyc++;

  tdc_serializer #(.WORD_W(WW)) dut (.clk, .rst, .rate, .in_valid, .in_word, .in_ready, .sdo);
  tdc_deser #(.WORD_W(WW)) u_rx (.clk, .rst, .rate320(rate == RATE_320), .sdo,
                                 .word_valid(rx_valid), .word(rx_word));

  always @(posedge clk) if (rx_valid) begin
    checks++;
    n_rx++;
    last_cyc = cyc;
    if (sent.size() == 0 || rx_word != sent[0]) begin
      failures++;
      $display("FAIL received %h", rx_word);
    end
    if (sent.size() > 0) void'(sent.pop_front());
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic burst(tdc_rate_t r, int nw, int per_word);
    int n0;
    @(negedge clk);
    rate = r;
    n0 = n_rx;
    first_cyc = cyc;
    for (int i = 0; i < nw; i++) begin
      in_valid = 1'b1;
      in_word  = WW'($urandom);
      sent.push_back(in_word);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (2 * per_word + 4) @(negedge clk);
    checks++;
    if (n_rx - n0 != nw) begin
      failures++;
      $display("FAIL rate %s: %0d of %0d words received", r.name(), n_rx - n0, nw);
    end
    // the last word completes nw frames after the first was taken
    checks++;
    if (last_cyc - first_cyc < longint'(nw * per_word) ||
        last_cyc - first_cyc > longint'(nw * per_word + 2)) begin
      failures++;
      $display("FAIL rate %s: %0d words took %0d cycles, expected %0d", r.name(), nw,
               last_cyc - first_cyc, nw * per_word);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (3) @(negedge clk);
    burst(RATE_320, 50, 12);
    burst(RATE_160, 50, 24);
    burst(RATE_320, 20, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
