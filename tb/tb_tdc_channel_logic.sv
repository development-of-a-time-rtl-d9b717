// tb_tdc_channel_logic: random slice results on all 24 channels, both serial
// ports decoded. Every received word must belong to the port of its channel
// and follow, channel by channel, the order in which the edges were given;
// edges may only go missing where the block reported them (overflow or
// unpaired), and nothing from a disabled channel may appear. Runs edge mode
// at 320 Mbps, pair mode with lone trailing edges at 160 Mbps, and a burst
// that overflows the FIFOs.
`timescale 1ns/1ps
module tb_tdc_channel_logic;
  import tdc_pkg::*;
  localparam int NC = 24, NP = 2, CPP = 12;

  logic clk = 1'b0, rst = 1'b1;
  tdc_mode_t mode = MODE_EDGE;
  tdc_rate_t rate = RATE_320;
  logic [NC-1:0] ch_enable = '1;
  logic [NC-1:0] lead_valid = '0, trail_valid = '0;
  logic [NC-1:0][14:0] lead_coarse, trail_coarse;
  logic [NC-1:0][1:0] lead_fine, trail_fine;
  logic [NP-1:0][1:0] sdo;
  logic [NC-1:0] overflow, unpaired;
  logic [NP-1:0] rx_valid;
  logic [NP-1:0][22:0] rx_word;
  int checks = 0, failures = 0, n_ovf = 0, n_unp = 0, n_lost = 0, n_rx = 0;
  tdc_word_t sent [NC][$];
  int ovf_ch [NC] = '{default: 0}, lost_ch [NC] = '{default: 0};

  always #3.125 clk = ~clk;

  tdc_channel_logic dut (.*);

  for (genvar p = 0; p < NP; p++) begin : g_rx
    tdc_deser #(.WORD_W(23)) u_rx (.clk, .rst, .rate320(rate == RATE_320), .sdo(sdo[p]),
                                   .word_valid(rx_valid[p]), .word(rx_word[p]));
  end

  always @(posedge clk) if (!rst) begin
    n_ovf += $countones(overflow);
    for (int c = 0; c < NC; c++) if (overflow[c]) ovf_ch[c]++;
    n_unp += $countones(unpaired);
    for (int p = 0; p < NP; p++) if (rx_valid[p]) begin
      automatic tdc_word_t w = rx_word[p];
      automatic int c = w.chid;
      automatic bit found = 0;
      checks++;
      n_rx++;
      if (c >= NC || c / CPP != p) begin
        failures++;
        $display("FAIL word %h on port %0d", w, p);
      end else begin
        while (sent[c].size() > 0 && !found) begin
          if (sent[c][0] == w) found = 1;
          else begin n_lost++; lost_ch[c]++; end
          void'(sent[c].pop_front());
        end
        if (!found) begin
          failures++;
          $display("FAIL word %h on port %0d was never sent", w, p);
        end
      end
    end
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drives 'cycles' cycles of random edges. p_pm: chance per channel and
  // cycle, per mille; gap: minimum cycles between two edges of one slice.
  task automatic drive(int cycles, int p_pm, int gap, bit lone_trail);
    int last_l [NC], last_t [NC];
    bit open_l [NC];
    for (int c = 0; c < NC; c++) begin last_l[c] = -100; last_t[c] = -100; open_l[c] = 0; end
    for (int n = 0; n < cycles; n++) begin
      @(negedge clk);
      lead_valid = '0;
      trail_valid = '0;
      for (int c = 0; c < NC; c++) begin
        if ($urandom_range(0, 999) >= p_pm) continue;
        if (!open_l[c] && lone_trail && n - last_t[c] >= gap && n > last_l[c]
            && $urandom_range(0, 9) == 0) begin
          // a trailing edge with no leading edge before it
          trail_valid[c] = 1; trail_coarse[c] = 15'($urandom); trail_fine[c] = 2'($urandom);
          last_t[c] = n;
          if (ch_enable[c]) sent[c].push_back('{chid: 5'(c), edge_kind: EDGE_TRAILING,
                                                fine: trail_fine[c], coarse: trail_coarse[c]});
        end else if (!open_l[c] && n - last_l[c] >= gap) begin
          lead_valid[c] = 1; lead_coarse[c] = 15'($urandom); lead_fine[c] = 2'($urandom);
          last_l[c] = n; open_l[c] = 1;
          if (ch_enable[c]) sent[c].push_back('{chid: 5'(c), edge_kind: EDGE_LEADING,
                                                fine: lead_fine[c], coarse: lead_coarse[c]});
        end else if (open_l[c] && n - last_t[c] >= gap && n > last_l[c]) begin
          trail_valid[c] = 1; trail_coarse[c] = 15'($urandom); trail_fine[c] = 2'($urandom);
          last_t[c] = n; open_l[c] = 0;
          if (ch_enable[c]) sent[c].push_back('{chid: 5'(c), edge_kind: EDGE_TRAILING,
                                                fine: trail_fine[c], coarse: trail_coarse[c]});
        end
      end
    end
    // close the pulses still open
    @(negedge clk);
    lead_valid = '0;
    trail_valid = '0;
    repeat (gap) @(negedge clk);
    for (int c = 0; c < NC; c++) if (open_l[c]) begin
      trail_valid[c] = 1; trail_coarse[c] = 15'($urandom); trail_fine[c] = 2'($urandom);
      if (ch_enable[c]) sent[c].push_back('{chid: 5'(c), edge_kind: EDGE_TRAILING,
                                            fine: trail_fine[c], coarse: trail_coarse[c]});
    end
    @(negedge clk);
    trail_valid = '0;
  endtask

  task automatic drain_and_check(string name, bit expect_loss);
    int left;
    repeat (30000) @(negedge clk);
    left = 0;
    for (int c = 0; c < NC; c++) begin
      lost_ch[c] += sent[c].size();
      lost_ch[c] = 0; ovf_ch[c] = 0;
      left += sent[c].size(); sent[c].delete();
    end
    n_lost += left;
    checks++;
    if (n_lost != n_ovf + n_unp) begin
      failures++;
      $display("FAIL %s: %0d edges missing, %0d overflow + %0d unpaired reported",
               name, n_lost, n_ovf, n_unp);
    end
    checks++;
    if (expect_loss != (n_lost > 0)) begin
      failures++;
      $display("FAIL %s: %0d edges missing", name, n_lost);
    end
    $display("%s: %0d words received, %0d overflow, %0d unpaired", name, n_rx, n_ovf, n_unp);
    n_lost = 0; n_ovf = 0; n_unp = 0; n_rx = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    ch_enable[5] = 0;
    // edge mode, 320 Mbps, load well below the port bandwidth
    drive(20000, 5, 6, 0);
    drain_and_check("edge mode 320 Mbps", 0);
    // pair mode, 160 Mbps, lone trailing edges are dropped
    mode = MODE_PAIR;
    rate = RATE_160;
    drive(40000, 2, 6, 1);
    drain_and_check("pair mode 160 Mbps", 1);
    // edge mode burst beyond the port bandwidth: FIFOs overflow
    mode = MODE_EDGE;
    drive(6000, 600, 5, 0);
    drain_and_check("overflow burst", 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
