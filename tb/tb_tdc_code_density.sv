// tb_tdc_code_density: code-density test of the fine-time bin_cnt on the full
// chip, as done on the test board.
//
// Pulses at random times, uncorrelated with the clock, on all 24 channels;
// every edge measured by any of the 48 slices is histogrammed by fine bin
// and by raw code q[3:0]. With random hits the share of hits in a bin is
// its width. The 180 degree clock is 60 ps early, so bin_cnt 0 and 2 should be
// 60 ps wider and bin_cnt 1 and 3 60 ps narrower than 781.25 ps (the gap after
// the early 180 degree edge is read as the next bin), and the corrected
// codes 0111 and 1000 should each take 60 ps of the 3125 ps period. The
// slice results are taken inside the chip, ahead of the serial ports, so the
// test is not limited by the port bandwidth.
`timescale 1ps/10fs
module tb_tdc_code_density;
  import tdc_pkg::*;
  localparam real T0   = 10000.0;
  localparam real SKEW = -60.0;
  localparam real LSB  = 781.25;
  localparam int  NC   = 24;
  localparam int  NPULSE = 800;    // pulses per channel

  logic clk_0, clk_90, clk_180, clk_270, clk160;
  logic rst = 1'b1;
  logic [NC-1:0] hit = '0;
  logic [1:0][1:0] sdo;
  logic [NC-1:0] overflow, unpaired, fine_exception;
  int checks = 0, failures = 0;
  int bin_cnt [4] = '{default: 0};
  int codes [16] = '{default: 0};
  int n_meas = 0;
  bit [NC-1:0] done = '0;

  tdc_clkgen #(.T0_PS(T0), .SKEW180_PS(SKEW)) u_clk (
    .clk_0, .clk_90, .clk_180, .clk_270, .clk160);

  tdc_asic_top dut (
    .hit, .clk320_0(clk_0), .clk320_90(clk_90), .clk320_180(clk_180),
    .clk320_270(clk_270), .clk160, .rst, .mode(MODE_EDGE), .rate(RATE_320),
    .ch_enable('1), .sdo, .overflow, .unpaired, .fine_exception);

  // histogram every slice result
  for (genvar c = 0; c < NC; c++) begin : g_mon
    always @(posedge clk160) if (!rst) begin
      if (dut.lead_valid[c]) begin
        bin_cnt[dut.lead_fine[c]]++;
        codes[dut.g_ch[c].u_chan.u_lead.q]++;
        n_meas++;
      end
      if (dut.trail_valid[c]) begin
        bin_cnt[dut.trail_fine[c]]++;
        codes[dut.g_ch[c].u_chan.u_trail.q]++;
        n_meas++;
      end
    end
  end

  for (genvar c = 0; c < NC; c++) begin : g_gen
    initial begin
      wait (rst == 1'b0);
      for (int n = 0; n < NPULSE; n++) begin
        #(real'($urandom_range(30000, 100000)) + real'($urandom_range(0, 9999)) / 100.0);
        hit[c] = 1'b1;
        #(real'($urandom_range(30000, 100000)) + real'($urandom_range(0, 9999)) / 100.0);
        hit[c] = 1'b0;
      end
      done[c] = 1'b1;
    end
  end

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_near(string what, real got, real want, real tol);
    checks++;
    $display("  %-22s %8.2f  (expected %8.2f +- %0.2f)", what, got, want, tol);
    if (got > want + tol || got < want - tol) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    real w [4];
    real exp_w [4] = '{LSB - SKEW, LSB + SKEW, LSB - SKEW, LSB + SKEW};
    repeat (4) @(posedge clk160);
    rst <= 1'b0;
    wait (done == '1);
    repeat (10) @(posedge clk160);
    checks++;
    if (n_meas != 2 * NC * NPULSE) begin
      failures++;
      $display("FAIL %0d measurements for %0d edges", n_meas, 2 * NC * NPULSE);
    end
    $display("bin widths from %0d edges (ps):", n_meas);
    for (int b = 0; b < 4; b++) begin
      w[b] = 4.0 * LSB * real'(bin_cnt[b]) / real'(n_meas);
      check_near($sformatf("bin %0d width", b), w[b], exp_w[b], 25.0);
      check_near($sformatf("bin %0d DNL", b), w[b] - LSB, exp_w[b] - LSB, 25.0);
    end
    $display("raw codes (share of the period, ps):");
    for (int q = 0; q < 16; q++)
      if (codes[q] > 0) $display("  %b  %0d", 4'(q), codes[q]);
    check_near("code 0111 (ps)", 4.0 * LSB * real'(codes[4'b0111]) / real'(n_meas), -SKEW, 15.0);
    check_near("code 1000 (ps)", 4.0 * LSB * real'(codes[4'b1000]) / real'(n_meas), -SKEW, 15.0);
    checks++;
    if (codes[0] + codes[5] + codes[10] + codes[15] != 0) begin
      failures++;
      $display("FAIL impossible codes seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
