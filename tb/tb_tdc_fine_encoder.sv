// tb_tdc_fine_encoder: checks all 16 values of q[3:0] against the fine-time
// correction table: the 4 ideal codes, the 8 corrected codes and the 4
// codes that cannot occur.
module tb_tdc_fine_encoder;
  logic [3:0] q;
  logic [1:0] fine;
  logic       exception, invalid;
  int         checks = 0, failures = 0;

  tdc_fine_encoder dut (.q, .fine, .exception, .invalid);

  // expected fine time per q (index), -1 for impossible codes
  int exp_fine [16] = '{
    -1, 1, 2, 1,   3, -1, 2, 2,   0, 0, -1, 1,   3, 0, 3, -1 };
  bit exp_exc [16] = '{
    0, 1, 1, 0,   1, 0, 0, 1,   1, 0, 0, 1,   0, 1, 1, 0 };

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      q = 4'(i);
      #1;
      checks++;
      if (exp_fine[i] < 0) begin
        if (!invalid || exception) begin
          failures++;
          $display("FAIL q=%b should be invalid", q);
        end
      end else if (invalid || fine != 2'(exp_fine[i]) || exception != exp_exc[i]) begin
        failures++;
        $display("FAIL q=%b fine=%0d exc=%0b inv=%0b, expected fine=%0d exc=%0b",
                 q, fine, exception, invalid, exp_fine[i], exp_exc[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
