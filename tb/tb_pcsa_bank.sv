// tb_pcsa_bank: random device-state pairs on the bit lines. With sense_en
// high the bank must latch, on that edge, 1 for (BL LRS, BLb HRS) and 0
// otherwise; with sense_en low it must hold the previous value.
module tb_pcsa_bank;
  logic clk = 0, sense_en = 0;
  logic [7:0] bl, blb, q, held;
  int checks = 0, failures = 0;

  pcsa_bank #(.W(8)) dut (.clk(clk), .sense_en(sense_en), .bl_lrs(bl), .blb_lrs(blb), .q(q));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    held = 8'h00;
    for (int t = 0; t < 1000; t++) begin
      bl = 8'($urandom); blb = 8'($urandom);
      sense_en = $urandom_range(0, 1) != 0;
      @(posedge clk);
      if (sense_en) held = bl & ~blb;
      #1;
      checks++;
      if (q !== held) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d q=%b exp=%b", t, q, held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
