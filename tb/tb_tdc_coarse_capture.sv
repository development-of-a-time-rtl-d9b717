// tb_tdc_coarse_capture: drives random counter values and fine times and
// checks that the hit edge samples both counters and that CNT2 is chosen
// for fine 0-1 and CNT1 for fine 2-3, and that later counter changes do not
// reach the output.
`timescale 1ps/1ps
module tb_tdc_coarse_capture;
  localparam int W = 15;
  logic         hit = 1'b0;
  logic [W-1:0] cnt1, cnt2, coarse;
  logic [1:0]   fine;
  int checks = 0, failures = 0;

  tdc_coarse_capture #(.W(W)) dut (.hit, .cnt1, .cnt2, .fine, .coarse);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] a, b, e;
    for (int n = 0; n < 200; n++) begin
      a = W'($urandom); b = W'($urandom);
      cnt1 = a; cnt2 = b; fine = 2'(n % 4);
      #100 hit = 1'b1;
      #10  cnt1 = ~a; cnt2 = ~b;      // counters move on after the hit
      #100 hit = 1'b0;
      e = (n % 4 < 2) ? b : a;
      checks++;
      if (coarse !== e) begin
        failures++;
        $display("FAIL fine=%0d coarse=%0d expected %0d", fine, coarse, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
