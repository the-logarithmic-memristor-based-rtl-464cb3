// tb_row_decoder: every address with the enable high and low; the expected
// word-line vector is (1 << addr) when enabled and all zeros otherwise.
module tb_row_decoder;
  logic       en;
  logic [2:0] addr;
  logic [7:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.N_ROWS(8)) dut (.en(en), .addr(addr), .wl(wl));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int r = 0; r < 8; r++) begin
        en = e[0]; addr = 3'(r);
        #1;
        checks++;
        if (wl !== (e ? 8'(1 << r) : 8'h00)) begin
          failures++;
          $display("FAIL en=%0d addr=%0d wl=%b", e, r, wl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
