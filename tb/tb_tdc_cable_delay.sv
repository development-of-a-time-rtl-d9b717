// tb_tdc_cable_delay: the cable-delay test of the test board, on the full
// chip with ideal clocks, read through the serial ports.
//
// Channel 0 and channel 12 (one on each port) get pulses whose leading
// edges are DELAY apart, at random phases to the clock. For each delay the
// difference of the two leading-edge times, in bins of 781.25 ps, is
// histogrammed. With a bin of width LSB and a delay d = (n + f) LSB, a pure
// quantiser gives n + 1 with probability f and n otherwise: mean d/LSB,
// RMS sqrt(f (1 - f)) LSB. The check is against these numbers; the single-
// channel precision quoted for such a test is that RMS divided by sqrt(2).
// Delays: 0.5 ps and 401.16 ps (the two intervals of the board test) and
// 1.5 LSB.
`timescale 1ps/10fs
module tb_tdc_cable_delay;
  import tdc_pkg::*;
  localparam real T0   = 10000.0;
  localparam real LSB  = 781.25;
  localparam int  NC   = 24;
  localparam int  NPAIR = 600;
  localparam int  CA = 0, CB = 12;

  logic clk_0, clk_90, clk_180, clk_270, clk160;
  logic rst = 1'b1;
  logic [NC-1:0] hit = '0;
  logic [1:0][1:0] sdo;
  logic [NC-1:0] overflow, unpaired, fine_exception;
  logic [1:0] rx_valid;
  logic [1:0][22:0] rx_word;
  int checks = 0, failures = 0;
  logic [16:0] ta [$], tb_q [$];
  int hist [-4:4];

  tdc_clkgen #(.T0_PS(T0)) u_clk (.clk_0, .clk_90, .clk_180, .clk_270, .clk160);

  tdc_asic_top dut (
    .hit, .clk320_0(clk_0), .clk320_90(clk_90), .clk320_180(clk_180),
    .clk320_270(clk_270), .clk160, .rst, .mode(MODE_EDGE), .rate(RATE_320),
    .ch_enable('1), .sdo, .overflow, .unpaired, .fine_exception);

  for (genvar p = 0; p < 2; p++) begin : g_rx
    tdc_deser #(.WORD_W(23)) u_rx (.clk(clk160), .rst, .rate320(1'b1), .sdo(sdo[p]),
                                   .word_valid(rx_valid[p]), .word(rx_word[p]));
  end

  // collect leading-edge times of the two channels
  always @(posedge clk160) if (!rst) begin
    for (int p = 0; p < 2; p++) if (rx_valid[p]) begin
      automatic tdc_word_t w = rx_word[p];
      if (w.edge_kind == EDGE_LEADING && w.chid == CA) ta.push_back({w.coarse, w.fine});
      if (w.edge_kind == EDGE_LEADING && w.chid == CB) tb_q.push_back({w.coarse, w.fine});
    end
  end

  initial begin
    #800_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_near(string what, real got, real want, real tol);
    checks++;
    $display("  %-26s %9.4f  (expected %9.4f +- %0.4f)", what, got, want, tol);
    if (got > want + tol || got < want - tol) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run_delay(real d);
    real sum, sum2, mean, rms, f, n;
    int  diff;
    ta.delete();
    tb_q.delete();
    for (int k = -4; k <= 4; k++) hist[k] = 0;
    for (int i = 0; i < NPAIR; i++) begin
      #(real'($urandom_range(200000, 260000)) + real'($urandom_range(0, 99999)) / 100.0);
      hit[CA] = 1'b1;
      #(d);
      hit[CB] = 1'b1;
      #50000;
      hit[CA] = 1'b0;
      hit[CB] = 1'b0;
    end
    #2_000_000;
    checks++;
    if (ta.size() != NPAIR || tb_q.size() != NPAIR) begin
      failures++;
      $display("FAIL delay %0.2f: %0d and %0d words", d, ta.size(), tb_q.size());
      return;
    end
    sum = 0.0; sum2 = 0.0;
    for (int i = 0; i < NPAIR; i++) begin
      diff = int'($signed(17'(tb_q[i] - ta[i])));
      if (diff >= -4 && diff <= 4) hist[diff]++;
      sum  += real'(diff);
      sum2 += real'(diff) * real'(diff);
    end
    mean = sum / NPAIR;
    rms  = $sqrt(sum2 / NPAIR - mean * mean);
    n = $floor(d / LSB);
    f = d / LSB - n;
    $display("delay %0.2f ps: counts -1:%0d 0:%0d 1:%0d 2:%0d", d, hist[-1], hist[0], hist[1], hist[2]);
    check_near("mean (LSB)", mean, d / LSB, 0.06);
    check_near("RMS (LSB)", rms, $sqrt(f * (1.0 - f)), 0.04);
    $display("  single-channel precision  %0.1f ps", rms * LSB / $sqrt(2.0));
  endtask

  initial begin
    repeat (4) @(posedge clk160);
    rst <= 1'b0;
    repeat (10) @(posedge clk160);
    run_delay(0.5);
    run_delay(401.16);
    run_delay(1.5 * LSB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
