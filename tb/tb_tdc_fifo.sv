// tb_tdc_fifo: random writes and reads against a queue model, including
// runs into full and empty and simultaneous write and read on a full FIFO.
// Checks the word read, empty, full and count every cycle.
`timescale 1ns/1ps
module tb_tdc_fifo;
  localparam int WIDTH = 23;
  localparam int DEPTH = 8;

  logic clk = 1'b0, rst = 1'b1;
  logic wr_en = 0, rd_en = 0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, n_full = 0, n_fullrw = 0;
  logic [WIDTH-1:0] model [$];

  always #3.125 clk = ~clk;

  tdc_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bias;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // compare state
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
          count != model.size() || (model.size() > 0 && rd_data != model[0])) begin
        failures++;
        if (failures < 10)
          $display("FAIL n=%0d size=%0d count=%0d empty=%0b full=%0b", n, model.size(),
                   count, empty, full);
      end
      if (full) n_full++;
      // choose the next operation; phases lean to filling or draining
      bias  = ((n / 200) % 2) ? 25 : 75;
      wr_en = ($urandom_range(0, 99) < bias) && (!full || (model.size() > 0));
      rd_en = ($urandom_range(0, 99) < 100 - bias) && (model.size() > 0);
      if (full && wr_en) rd_en = 1'b1;     // write on full needs a read
      wr_data = WIDTH'($urandom);
      if (full && wr_en && rd_en) n_fullrw++;
      @(posedge clk);
      #0;
      if (rd_en) void'(model.pop_front());
      if (wr_en) model.push_back(wr_data);
    end
    checks++;
    if (n_full == 0 || n_fullrw == 0) begin
      failures++;
      $display("FAIL full=%0d full_rw=%0d", n_full, n_fullrw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
