// tb_tdc_fine_sampler: hits at random times against the four 320 MHz
// phases; q[3:0] must be the ideal code of the quarter period the hit falls
// in: 1001, 0011, 0110, 1100 for quarters 0..3.
`timescale 1ps/10fs
module tb_tdc_fine_sampler;
  import tdc_ref_pkg::*;
  localparam real T0 = 10000.0;

  logic clk_0, clk_90, clk_180, clk_270, clk160;
  logic hit = 1'b0;
  logic [3:0] q;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  tdc_clkgen #(.T0_PS(T0)) u_clk (.clk_0, .clk_90, .clk_180, .clk_270, .clk160);
  tdc_fine_sampler dut (.hit, .clk_0, .clk_90, .clk_180, .clk_270, .q);

  logic [3:0] ideal [4] = '{4'b1001, 4'b0011, 4'b0110, 4'b1100};

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real t;
    int  bin;
    #(T0 + 5000.0);
    for (int n = 0; n < 400; n++) begin
      #($urandom_range(20000, 40000) + 0.13);
      t = $realtime;
      bin = int'($floor((t - T0) / BIN)) % 4;
      hit = 1'b1;
      #1000 hit = 1'b0;
      checks++;
      seen[bin]++;
      if (q !== ideal[bin]) begin
        failures++;
        $display("FAIL t=%0.2f bin=%0d q=%b expected %b", t, bin, q, ideal[bin]);
      end
    end
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (seen[b] == 0) begin
        failures++;
        $display("FAIL bin %0d never hit", b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
