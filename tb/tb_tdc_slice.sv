// tb_tdc_slice: one TDC slice with the coarse counters and a clock source
// whose 180 degree phase is 80 ps early, so that hits close to the 0/180
// edges give corrected codes. Every measured time must equal the reference
// model (clock levels at the hit, correction table, counter choice), lie
// within one fine bin of the true time, and arrive 3 to 4 logic clock
// cycles after the hit.
`timescale 1ps/10fs
module tb_tdc_slice;
  import tdc_ref_pkg::*;
  localparam real T0   = 10000.0;
  localparam real SKEW = -80.0;
  localparam int  W    = 15;

  logic clk_0, clk_90, clk_180, clk_270, clk160;
  logic rst = 1'b1, hit = 1'b0;
  logic [W-1:0] cnt1, cnt2, coarse;
  logic [1:0]   fine;
  logic         valid, exception;
  int checks = 0, failures = 0, n_exc = 0;
  real t_rst;

  tdc_clkgen #(.T0_PS(T0), .SKEW180_PS(SKEW)) u_clk (.clk_0, .clk_90, .clk_180, .clk_270, .clk160);
  tdc_coarse_counter #(.W(W)) u_cnt (.clk_0, .rst, .cnt1, .cnt2);
  tdc_slice #(.COARSE_W(W)) dut (
    .hit, .clk_0, .clk_90, .clk_180, .clk_270, .cnt1, .cnt2,
    .clk(clk160), .rst, .valid, .coarse, .fine, .exception);

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real    t, tn;
    longint m, id;
    int     lat;
    repeat (4) @(posedge clk160);
    rst <= 1'b0;
    t_rst = $realtime;
    repeat (4) @(posedge clk160);
    for (int n = 0; n < 600; n++) begin
      // wait a random time; every third hit is placed just inside a gap
      #($urandom_range(30000, 50000) + 0.13);
      if (n % 3 == 0) begin
        tn = $realtime - T0;
        tn = T0 + ($floor(tn / PERIOD) + 2.0) * PERIOD
             + ((n % 2) ? PERIOD / 2.0 : 0.0) + SKEW / 2.0 + 0.13;
        #(tn - $realtime);
      end
      t = $realtime;
      hit = 1'b1;
      lat = 0;
      fork
        #($urandom_range(2000, 20000)) hit = 1'b0;
      join_none
      while (!valid) begin
        @(posedge clk160);
        #1;
        lat++;
        if (lat > 8) break;
      end
      m  = meas_bins(t, T0, SKEW, t_rst);
      id = ideal_bins(t, t_rst);
      checks += 3;
      if (!valid || lat < 3 || lat > 4) begin
        failures++;
        $display("FAIL latency %0d cycles", lat);
      end
      if ({coarse, fine} != 17'(m)) begin
        failures++;
        $display("FAIL t=%0.2f got %0d:%0d expected %0d:%0d", t, coarse, fine,
                 17'(m) >> 2, m % 4);
      end
      if (m - id > 1 || id - m > 1) begin
        failures++;
        $display("FAIL t=%0.2f measured %0d bins, true %0d", t, m, id);
      end
      if (exception) n_exc++;
      wait (hit == 1'b0);
    end
    checks++;
    if (n_exc == 0) begin
      failures++;
      $display("FAIL no corrected code seen");
    end
    $display("corrected codes: %0d", n_exc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
