// tb_tdc_coarse_counter: after a counter reset, checks CNT1 and CNT2 in the
// middle of each half period against the count of clock edges since the
// reset (both k in the high half of period k; CNT2 = k+1, CNT1 = k in the
// low half), through a full wrap of the 15-bit counters (102.4 us).
`timescale 1ps/10fs
module tb_tdc_coarse_counter;
  localparam real T0 = 10000.0;
  localparam int  W  = 15;

  logic clk_0, clk_90, clk_180, clk_270, clk160;
  logic rst = 1'b1;
  logic [W-1:0] cnt1, cnt2;
  int checks = 0, failures = 0;

  tdc_clkgen #(.T0_PS(T0)) u_clk (.clk_0, .clk_90, .clk_180, .clk_270, .clk160);
  tdc_coarse_counter #(.W(W)) dut (.clk_0, .rst, .cnt1, .cnt2);

  initial begin
    #500_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint k;
    int     wraps = 0;
    repeat (5) @(posedge clk_0);
    rst <= 1'b0;            // this edge still sees rst high: period 0
    for (k = 0; k < (1 << W) + 300; k++) begin
      #781.25;              // middle of the high half of period k
      checks++;
      if (cnt1 != W'(k) || cnt2 != W'(k)) begin
        failures++;
        if (failures < 10)
          $display("FAIL high half k=%0d cnt1=%0d cnt2=%0d", k, cnt1, cnt2);
      end
      #1562.5;              // middle of the low half
      checks++;
      if (cnt1 != W'(k) || cnt2 != W'(k + 1)) begin
        failures++;
        if (failures < 10)
          $display("FAIL low half k=%0d cnt1=%0d cnt2=%0d", k, cnt1, cnt2);
      end
      if (cnt1 == '0 && k > 0) wraps++;
      #781.25;
    end
    checks++;
    if (wraps != 1) begin
      failures++;
      $display("FAIL counters wrapped %0d times", wraps);
    end
    // reset again in the middle of a run
    @(posedge clk_0);
    rst <= 1'b1;
    repeat (2) @(posedge clk_0);
    #100;
    checks++;
    if (cnt1 != '0 || cnt2 != '0) begin
      failures++;
      $display("FAIL reset cnt1=%0d cnt2=%0d", cnt1, cnt2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
