// tb_tdc_channel: time-over-threshold pulses of random width, down to 1 ns,
// on one channel. The leading slice must report the rising and the
// trailing slice the falling edge of each pulse, each equal to the
// reference model; a 1 ns pulse, far shorter than the dead time of one
// slice, must still give both edges.
`timescale 1ps/10fs
module tb_tdc_channel;
  import tdc_ref_pkg::*;
  localparam real T0 = 10000.0;
  localparam int  W  = 15;

  logic clk_0, clk_90, clk_180, clk_270, clk160;
  logic rst = 1'b1, hit = 1'b0;
  logic [W-1:0] cnt1, cnt2, lead_coarse, trail_coarse;
  logic [1:0]   lead_fine, trail_fine;
  logic         lead_valid, trail_valid, lead_exception, trail_exception;
  int checks = 0, failures = 0, n_short = 0;
  real t_rst;
  int  n_lead = 0, n_trail = 0;

  always @(posedge clk160) begin
    if (lead_valid) n_lead++;
    if (trail_valid) n_trail++;
  end

  tdc_clkgen #(.T0_PS(T0)) u_clk (.clk_0, .clk_90, .clk_180, .clk_270, .clk160);
  tdc_coarse_counter #(.W(W)) u_cnt (.clk_0, .rst, .cnt1, .cnt2);
  tdc_channel #(.COARSE_W(W)) dut (
    .hit, .clk_0, .clk_90, .clk_180, .clk_270, .cnt1, .cnt2, .clk(clk160), .rst,
    .lead_valid, .lead_coarse, .lead_fine, .lead_exception,
    .trail_valid, .trail_coarse, .trail_fine, .trail_exception);

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real    tl, tt;
    longint ml, mt;
    int     l0, t0c;
    repeat (4) @(posedge clk160);
    rst <= 1'b0;
    t_rst = $realtime;
    repeat (4) @(posedge clk160);
    for (int n = 0; n < 300; n++) begin
      #($urandom_range(30000, 60000) + 0.37);
      l0  = n_lead;
      t0c = n_trail;
      tl = $realtime;
      hit = 1'b1;
      #((n % 5 == 0) ? 1000.0 : real'($urandom_range(2000, 300000)));
      tt = $realtime;
      hit = 1'b0;
      if (tt - tl < 1500.0) n_short++;
      repeat (6) @(posedge clk160);
      #1;
      ml = meas_bins(tl, T0, 0.0, t_rst);
      mt = meas_bins(tt, T0, 0.0, t_rst);
      checks += 3;
      if (n_lead != l0 + 1 || n_trail != t0c + 1) begin
        failures++;
        $display("FAIL pulse %0d: %0d leading, %0d trailing results", n,
                 n_lead - l0, n_trail - t0c);
      end
      if ({lead_coarse, lead_fine} != 17'(ml)) begin
        failures++;
        $display("FAIL leading %0d:%0d expected %0d", lead_coarse, lead_fine, 17'(ml));
      end
      if ({trail_coarse, trail_fine} != 17'(mt)) begin
        failures++;
        $display("FAIL trailing %0d:%0d expected %0d", trail_coarse, trail_fine, 17'(mt));
      end
    end
    checks++;
    if (n_short == 0) begin
      failures++;
      $display("FAIL no short pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
