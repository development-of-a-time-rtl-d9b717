// tb_tdc_readout_arbiter: twelve queue-modelled FIFOs filled at random, a
// receiver that is ready at random. Each accepted word must come from the
// lowest-numbered FIFO that was not empty when it was loaded, in FIFO order,
// and every word written must come out exactly once.
`timescale 1ns/1ps
module tb_tdc_readout_arbiter;
  import tdc_pkg::*;
  localparam int N = 12;

  logic clk = 1'b0, rst = 1'b1;
  logic [N-1:0] fifo_empty, fifo_rd;
  tdc_word_t [N-1:0] fifo_data;
  tdc_word_t out_word;
  logic out_valid, out_ready = 1'b0;
  int checks = 0, failures = 0, n_out = 0, n_in = 0, n_contend = 0;
  tdc_word_t q [N][$];
  tdc_word_t exp_q [$];

  always #3.125 clk = ~clk;

  tdc_readout_arbiter #(.N(N)) dut (.*);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      fifo_empty[i] = (q[i].size() == 0);
      fifo_data[i]  = (q[i].size() > 0) ? q[i][0] : '0;
    end
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: at each clock edge, the popped FIFO must be the lowest non-empty
  always @(posedge clk) if (!rst) begin
    automatic int lowest = -1;
    for (int i = N - 1; i >= 0; i--) if (q[i].size() > 0) lowest = i;
    if ($countones(~fifo_empty) > 1) n_contend++;
    if (fifo_rd != 0) begin
      checks++;
      if (!$onehot(fifo_rd) || lowest < 0 || fifo_rd != (N'(1) << lowest)) begin
        failures++;
        $display("FAIL pop %b, lowest non-empty %0d", fifo_rd, lowest);
      end
      for (int i = 0; i < N; i++)
        if (fifo_rd[i] && q[i].size() > 0) exp_q.push_back(q[i].pop_front());
    end
    if (out_valid && out_ready) begin
      checks++;
      n_out++;
      if (exp_q.size() == 0 || out_word != exp_q[0]) begin
        failures++;
        $display("FAIL out %h", out_word);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 99) < 40);
      if (n < 2500 && $urandom_range(0, 99) < 35) begin
        automatic int c = $urandom_range(0, N - 1);
        q[c].push_back('{chid: 5'(c), edge_kind: edge_t'($urandom_range(0, 1)),
                         fine: 2'($urandom), coarse: 15'($urandom)});
        n_in++;
      end
    end
    out_ready = 1;
    repeat (300) @(negedge clk);
    checks++;
    if (n_out != n_in || n_contend == 0) begin
      failures++;
      $display("FAIL %0d words in, %0d out, %0d cycles with contention", n_in, n_out, n_contend);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
