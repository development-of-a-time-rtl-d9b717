// tb_tdc_edge_pairing: directed cases for the per-channel word builder:
// edge mode with single and simultaneous edges, waiting on a full FIFO and
// losing an edge (overflow), pair mode with a good pair, a lone trailing
// edge, a leading edge replaced by a newer one, and a disabled channel.
// Every FIFO write is compared with the word expected from the case.
`timescale 1ns/1ps
module tb_tdc_edge_pairing;
  import tdc_pkg::*;
  localparam logic [4:0] ID = 5'd19;

  logic clk = 1'b0, rst = 1'b1, enable = 1'b1;
  tdc_mode_t mode = MODE_EDGE;
  logic lead_valid = 0, trail_valid = 0, fifo_full = 0;
  logic [14:0] lead_coarse = '0, trail_coarse = '0;
  logic [1:0]  lead_fine = '0, trail_fine = '0;
  logic wr_en, overflow, unpaired;
  tdc_word_t wr_data;
  int checks = 0, failures = 0, n_ovf = 0, n_unp = 0;
  tdc_word_t got [$];

  always #3.125 clk = ~clk;

  tdc_edge_pairing #(.CHID(ID)) dut (.*);

  always @(posedge clk) begin
    if (wr_en && !fifo_full) got.push_back(wr_data);
    if (overflow) n_ovf++;
    if (unpaired) n_unp++;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic edge_in(bit lead, bit trail, logic [14:0] c, logic [1:0] f);
    @(negedge clk);
    lead_valid = lead;  lead_coarse = c;      lead_fine = f;
    trail_valid = trail; trail_coarse = c + 1; trail_fine = f + 1;
    @(negedge clk);
    lead_valid = 0; trail_valid = 0;
  endtask

  function automatic tdc_word_t w(edge_t e, logic [14:0] c, logic [1:0] f);
    return '{chid: ID, edge_kind: e, fine: f, coarse: c};
  endfunction

  task automatic expect_words(string name, tdc_word_t exp [$]);
    repeat (6) @(negedge clk);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: %0d words written, %0d expected", name, got.size(), exp.size());
      foreach (got[i]) $display("  got %h", got[i]);
      foreach (exp[i]) $display("  exp %h", exp[i]);
    end
    got.delete();
  endtask

  task automatic expect_count(string name, int have, int want);
    checks++;
    if (have != want) begin
      failures++;
      $display("FAIL %s: %0d, expected %0d", name, have, want);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    got.delete();
    n_ovf = 0;
    n_unp = 0;
    // edge mode
    edge_in(1, 0, 15'd100, 2'd1);
    expect_words("edge lead", '{w(EDGE_LEADING, 15'd100, 2'd1)});
    edge_in(0, 1, 15'd200, 2'd2);
    expect_words("edge trail", '{w(EDGE_TRAILING, 15'd201, 2'd3)});
    edge_in(1, 1, 15'd300, 2'd0);
    expect_words("edge both", '{w(EDGE_LEADING, 15'd300, 2'd0), w(EDGE_TRAILING, 15'd301, 2'd1)});
    // full FIFO: first edge waits, second is lost
    fifo_full = 1;
    edge_in(1, 0, 15'd400, 2'd3);
    edge_in(1, 0, 15'd500, 2'd3);
    repeat (2) @(negedge clk);
    expect_count("overflow while full", n_ovf, 1);
    fifo_full = 0;
    expect_words("after full", '{w(EDGE_LEADING, 15'd400, 2'd3)});
    // pair mode
    mode = MODE_PAIR;
    edge_in(1, 0, 15'd600, 2'd1);
    repeat (3) @(negedge clk);
    expect_count("lead held back", got.size(), 0);
    edge_in(0, 1, 15'd610, 2'd2);
    expect_words("pair", '{w(EDGE_LEADING, 15'd600, 2'd1), w(EDGE_TRAILING, 15'd611, 2'd3)});
    edge_in(0, 1, 15'd700, 2'd0);
    expect_words("lone trailing", '{});
    expect_count("unpaired lone trailing", n_unp, 1);
    edge_in(1, 0, 15'd800, 2'd0);
    edge_in(1, 0, 15'd810, 2'd2);
    edge_in(0, 1, 15'd820, 2'd1);
    expect_words("replaced leading", '{w(EDGE_LEADING, 15'd810, 2'd2), w(EDGE_TRAILING, 15'd821, 2'd2)});
    expect_count("unpaired replaced", n_unp, 2);
    edge_in(1, 1, 15'd900, 2'd3);
    expect_words("pair same cycle", '{w(EDGE_LEADING, 15'd900, 2'd3), w(EDGE_TRAILING, 15'd901, 2'd0)});
    // pair with a full FIFO between the two words
    edge_in(1, 0, 15'd950, 2'd1);
    @(negedge clk);
    fork
      begin
        @(posedge wr_en);
        @(negedge clk);
        fifo_full = 1;
        repeat (4) @(negedge clk);
        fifo_full = 0;
      end
      edge_in(0, 1, 15'd960, 2'd1);
    join
    expect_words("pair across full", '{w(EDGE_LEADING, 15'd950, 2'd1), w(EDGE_TRAILING, 15'd961, 2'd2)});
    // disabled channel
    enable = 0;
    mode = MODE_EDGE;
    edge_in(1, 1, 15'd1000, 2'd0);
    expect_words("disabled", '{});
    expect_count("no overflow in pair tests", n_ovf, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
