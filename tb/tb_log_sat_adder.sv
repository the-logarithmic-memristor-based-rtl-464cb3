// tb_log_sat_adder: exhaustive check of the saturating log-probability adder.
// Every pair (a, b) of 8-bit codes is applied; the expected sum is computed
// with integer arithmetic (a + b, or 255 when a + b > 255) and compared with
// sum, and ovf with (a + b > 255).
module tb_log_sat_adder;
  logic [7:0] a, b, sum;
  logic       ovf;
  int checks = 0, failures = 0;

  log_sat_adder #(.W(8)) dut (.a(a), .b(b), .sum(sum), .ovf(ovf));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_s;
    for (int i = 0; i < 256; i++)
      for (int k = 0; k < 256; k++) begin
        a = 8'(i); b = 8'(k);
        #1;
        exp_s = (i + k > 255) ? 255 : i + k;
        checks++;
        if (int'(sum) != exp_s || ovf != (i + k > 255)) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%0d sum=%0d ovf=%0d exp=%0d", i, k, sum, ovf, exp_s);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
