// tb_likelihood_block: writes a random 8-bit word into every row by driving
// the programming port device by device (FORM both memristors of every bit,
// then SET the LRS side and RESET the HRS side of the complementary pair),
// then reads the rows back in random order. Checks: the word read equals the
// word written; it appears on llh the cycle after the sense edge and holds
// while sense_en is low; pulses given while the block is not selected change
// nothing.
module tb_likelihood_block;
  import bm_pkg::*;
  localparam int R = 8, W = 8, PW = 6;
  logic clk = 0, sense_en = 0, prog_sel = 0, pulse = 0;
  logic [2:0] rd_addr = 0, prog_row = 0, prog_col = 0;
  side_e side = SIDE_BL;
  dev_op_e op = DEV_NOP;
  logic [W-1:0] llh;
  logic [W-1:0] words [R];
  int checks = 0, failures = 0;

  likelihood_block #(.N_ROWS(R), .W(W), .T_PULSE_MIN(4)) dut (
    .clk(clk), .sense_en(sense_en), .rd_addr(rd_addr), .llh(llh),
    .prog_sel(prog_sel), .prog_row(prog_row), .prog_col(prog_col),
    .prog_side(side), .prog_op(op), .prog_pulse(pulse));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dev_pulse(bit sel, int r, int c, int s, dev_op_e o);
    @(negedge clk);
    prog_sel = sel; prog_row = 3'(r); prog_col = 3'(c); side = side_e'(s); op = o; pulse = 1;
    repeat (PW) @(negedge clk);
    pulse = 0;
    @(negedge clk);
    prog_sel = 0;
  endtask

  task automatic write_word(bit sel, int r, logic [W-1:0] d);
    for (int c = 0; c < W; c++) begin
      dev_pulse(sel, r, c, 0, DEV_FORM);
      dev_pulse(sel, r, c, 1, DEV_FORM);
    end
    for (int c = 0; c < W; c++) dev_pulse(sel, r, c, d[c] ? 0 : 1, DEV_SET);
    for (int c = 0; c < W; c++) dev_pulse(sel, r, c, d[c] ? 1 : 0, DEV_RESET);
  endtask

  task automatic read_check(int r);
    @(negedge clk);
    rd_addr = 3'(r); sense_en = 1;
    @(negedge clk);
    sense_en = 0;
    rd_addr = 3'($urandom);
    checks++;
    if (llh !== words[r]) begin
      failures++;
      $display("FAIL row %0d read %h exp %h", r, llh, words[r]);
    end
    @(negedge clk);
    checks++;
    if (llh !== words[r]) begin failures++; $display("FAIL row %0d not held", r); end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin
      words[r] = W'($urandom);
      write_word(1, r, words[r]);
    end
    for (int t = 0; t < 40; t++) read_check($urandom_range(0, R-1));
    // pulses while the block is deselected must not reach the array
    write_word(0, 2, ~words[2]);
    read_check(2);
    // rewrite one row with new data (SET/RESET of formed devices)
    words[5] = ~words[5];
    for (int c = 0; c < W; c++) dev_pulse(1, 5, c, words[5][c] ? 0 : 1, DEV_SET);
    for (int c = 0; c < W; c++) dev_pulse(1, 5, c, words[5][c] ? 1 : 0, DEV_RESET);
    for (int r = 0; r < R; r++) read_check(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
