// tb_tdc_asic_top: the whole chip, end to end, at its full size (24
// channels, two ports, 15-bit coarse time), with the 180 degree clock phase
// 60 ps early so that corrected fine-time codes occur.
//
// Every channel gets time-over-threshold pulses from a process of its own.
// For each edge the expected word (channel, edge, 17-bit time from the
// reference model) is queued; both serial ports are decoded, and each word
// received must be the next expected word of its channel, on the right
// port, or follow only edges that the chip reported as lost (overflow,
// unpaired). Every time must also be within one fine bin of the true time.
// Phases:
//   1. edge mode, 320 Mbps, all channels at a moderate rate, no loss;
//   2. pair mode, 160 Mbps, channel 7 switched on in the middle of a pulse
//      (its trailing edge has no leading edge), channel 20 switched off;
//   3. edge mode, 160 Mbps, port 0 channels far beyond the port bandwidth:
//      FIFOs fill and edges are lost.
// Over the run the coarse counter wraps (after 102.4 us). Each mechanism is
// counted, and one that never happened counts as a failure.
`timescale 1ps/10fs
module tb_tdc_asic_top;
  import tdc_pkg::*;
  import tdc_ref_pkg::*;
  localparam real T0   = 10000.0;
  localparam real SKEW = -60.0;
  localparam int  NC = 24, NP = 2, CPP = 12;

  logic clk_0, clk_90, clk_180, clk_270, clk160;
  logic rst = 1'b1;
  logic [NC-1:0] hit = '0;
  tdc_mode_t mode = MODE_EDGE;
  tdc_rate_t rate = RATE_320;
  logic [NC-1:0] ch_enable = '1;
  logic [NP-1:0][1:0] sdo;
  logic [NC-1:0] overflow, unpaired, fine_exception;

  logic [NP-1:0] rx_valid;
  logic [NP-1:0][22:0] rx_word;

  int checks = 0, failures = 0;
  int n_ovf = 0, n_unp = 0, n_exc = 0, n_lost = 0, n_wrap = 0, n_contend = 0;
  int n_ovf_all = 0, n_unp_all = 0;
  int n_rx_edge = 0, n_rx_pair = 0, n_rx_160 = 0, n_rx_320 = 0;
  real t_rst;
  tdc_word_t exp_q [NC][$];
  longint    bins_q [NC][$];

  // hit generator control
  bit     gen_on = 0;
  int     gap_min_ns = 1000, gap_max_ns = 3000;
  int     w_min_ns = 1, w_max_ns = 300;
  logic [NC-1:0] gen_mask = '1;
  bit [NC-1:0] busy = '0;

  tdc_clkgen #(.T0_PS(T0), .SKEW180_PS(SKEW)) u_clk (
    .clk_0, .clk_90, .clk_180, .clk_270, .clk160);

  tdc_asic_top dut (
    .hit, .clk320_0(clk_0), .clk320_90(clk_90), .clk320_180(clk_180),
    .clk320_270(clk_270), .clk160, .rst, .mode, .rate, .ch_enable,
    .sdo, .overflow, .unpaired, .fine_exception);

  for (genvar p = 0; p < NP; p++) begin : g_rx
    tdc_deser #(.WORD_W(23)) u_rx (.clk(clk160), .rst, .rate320(rate == RATE_320),
                                   .sdo(sdo[p]), .word_valid(rx_valid[p]), .word(rx_word[p]));
  end

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected word of an edge of channel c at time t
  task automatic expect_edge(int c, edge_t e, real t);
    longint m, id;
    tdc_word_t w;
    if (!ch_enable[c]) return;
    m  = meas_bins(t, T0, SKEW, t_rst);
    id = ideal_bins(t, t_rst);
    checks++;
    if (m - id > 1 || id - m > 1) begin
      failures++;
      $display("FAIL reference beyond one bin at t=%0.2f", t);
    end
    if (id >= (64'd1 << TIME_BITS)) n_wrap++;
    w.chid = 5'(c); w.edge_kind = e;
    w.coarse = 15'(m >> 2); w.fine = 2'(m);
    exp_q[c].push_back(w);
    bins_q[c].push_back(id);
  endtask

  localparam int TIME_BITS = COARSE_W + FINE_W;

  // one pulse generator per channel
  for (genvar c = 0; c < NC; c++) begin : g_gen
    initial begin
      real t;
      wait (rst == 1'b0);
      forever begin
        if (!gen_on || !gen_mask[c]) begin
          @(posedge clk160);
          continue;
        end
        busy[c] = 1;
        #(real'($urandom_range(gap_min_ns, gap_max_ns)) * 1000.0
          + real'($urandom_range(0, 999)) + 0.13);
        t = $realtime;
        hit[c] = 1'b1;
        expect_edge(c, EDGE_LEADING, t);
        #(real'($urandom_range(w_min_ns, w_max_ns)) * 1000.0
          + real'($urandom_range(0, 999)) + 0.29);
        t = $realtime;
        hit[c] = 1'b0;
        expect_edge(c, EDGE_TRAILING, t);
        busy[c] = 0;
      end
    end
  end

  // receive and check
  always @(posedge clk160) if (!rst) begin
    n_ovf += $countones(overflow);
    n_unp += $countones(unpaired);
    n_exc += $countones(fine_exception);
    if ($countones(~dut.u_logic.fifo_empty[CPP-1:0]) > 1) n_contend++;
    for (int p = 0; p < NP; p++) if (rx_valid[p]) begin
      automatic tdc_word_t w = rx_word[p];
      automatic int c = w.chid;
      automatic bit found = 0;
      checks++;
      if (mode == MODE_PAIR) n_rx_pair++; else n_rx_edge++;
      if (rate == RATE_320) n_rx_320++; else n_rx_160++;
      if (c >= NC || c / CPP != p) begin
        failures++;
        $display("FAIL word %h on port %0d", w, p);
      end else begin
        while (exp_q[c].size() > 0 && !found) begin
          if (exp_q[c][0] == w) found = 1;
          else n_lost++;
          void'(exp_q[c].pop_front());
          void'(bins_q[c].pop_front());
        end
        if (!found) begin
          failures++;
          $display("FAIL ch %0d: word %h not expected", c, w);
        end
      end
    end
  end

  task automatic settle(int us);
    gen_on = 0;
    wait (busy == '0);
    #(real'(us) * 1.0e6);
  endtask

  task automatic account(string name, bit expect_loss);
    int left = 0;
    for (int c = 0; c < NC; c++) begin
      left += exp_q[c].size();
      exp_q[c].delete();
      bins_q[c].delete();
    end
    n_lost += left;
    checks++;
    if (n_lost != n_ovf + n_unp || expect_loss != (n_lost > 0)) begin
      failures++;
      $display("FAIL %s: %0d edges missing, %0d overflow + %0d unpaired reported",
               name, n_lost, n_ovf, n_unp);
    end
    $display("%s: missing %0d, overflow %0d, unpaired %0d", name, n_lost, n_ovf, n_unp);
    n_ovf_all += n_ovf;
    n_unp_all += n_unp;
    n_lost = 0; n_ovf = 0; n_unp = 0;
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL %s never happened", what);
    end
  endtask

  initial begin
    repeat (4) @(posedge clk160);
    rst <= 1'b0;
    t_rst = $realtime;
    repeat (4) @(posedge clk160);
    // 1. edge mode, 320 Mbps
    gen_on = 1;
    #40_000_000;
    settle(5);
    account("edge mode 320 Mbps", 0);
    // 2. pair mode, 160 Mbps; channel 7 enabled inside a pulse
    mode = MODE_PAIR;
    rate = RATE_160;
    ch_enable[20] = 1'b0;
    ch_enable[7]  = 1'b0;
    gen_mask[7]   = 1'b0;
    hit[7] = 1'b1;                     // leading edge while disabled
    #200_000;
    ch_enable[7] = 1'b1;
    #200_000;
    hit[7] = 1'b0;
    expect_edge(7, EDGE_TRAILING, $realtime);
    gen_mask[7] = 1'b1;
    gap_min_ns = 1500; gap_max_ns = 5000;
    gen_on = 1;
    #40_000_000;
    settle(6);
    account("pair mode 160 Mbps", 1);
    ch_enable[20] = 1'b1;
    // 3. edge mode, 160 Mbps, port 0 overloaded
    mode = MODE_EDGE;
    gen_mask = {{CPP{1'b0}}, {CPP{1'b1}}};
    gap_min_ns = 30; gap_max_ns = 60;
    w_min_ns = 30; w_max_ns = 60;
    gen_on = 1;
    #25_000_000;
    settle(25);
    account("overflow burst 160 Mbps", 1);
    $display("mechanisms:");
    need("edge-mode words", n_rx_edge);
    need("pair-mode words", n_rx_pair);
    need("words at 320 Mbps", n_rx_320);
    need("words at 160 Mbps", n_rx_160);
    need("corrected fine codes", n_exc);
    need("coarse counter wraps", n_wrap);
    need("port contention cycles", n_contend);
    need("FIFO overflows", n_ovf_all);
    need("unpaired edges dropped", n_unp_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
