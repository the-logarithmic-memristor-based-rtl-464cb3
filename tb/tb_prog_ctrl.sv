// tb_prog_ctrl: random FORM / SET / RESET commands with random data, block
// and row. A monitor records every pulse (bit, side, operation, length).
// When done rises the record is compared with the pulse list worked out
// from the command: FORM pulses all 16 memristors; SET pulses BL where the
// bit is 1 and BLb where it is 0; RESET the opposite; in device order bit 0
// BL, bit 0 BLb, bit 1 BL ... Also checked: each pulse lasts PULSE_CYCLES
// cycles; the block and row outputs hold the command's; cmd_ready is low
// while busy; a PRIOR command is not taken by the sequencer; and the
// command takes 16 + pulses * (PULSE_CYCLES + 1) cycles.
module tb_prog_ctrl;
  import bm_pkg::*;
  localparam int P = 5;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done, busy, pulse;
  pcmd_e cmd_op = PCMD_FORM;
  logic [3:0] cmd_blk = 0, blk;
  logic [2:0] cmd_row = 0, row, col;
  logp_t cmd_data = 0;
  side_e side;
  dev_op_e op;
  int checks = 0, failures = 0;

  prog_ctrl #(.N_BLK(16), .N_ROWS(8), .PULSE_CYCLES(P)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_blk(cmd_blk), .cmd_row(cmd_row), .cmd_data(cmd_data), .done(done),
    .busy(busy), .blk(blk), .row(row), .col(col), .side(side), .op(op), .pulse(pulse));

  always #5 clk = ~clk;

  // pulse monitor
  int rec_col[$], rec_side[$], rec_len[$];
  dev_op_e rec_op[$];
  int cur_len = 0;
  always @(posedge clk) begin
    if (pulse) cur_len <= cur_len + 1;
    else if (cur_len != 0) begin
      rec_col.push_back(int'(col)); rec_side.push_back(int'(side));
      rec_op.push_back(op); rec_len.push_back(cur_len);
      cur_len <= 0;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    int exp_col[$], exp_side[$];
    dev_op_e exp_op;
    int cycles, np;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cmd_ready && !busy && !pulse, "idle after reset");
    // a prior write is not for the sequencer
    cmd_valid = 1; cmd_op = PCMD_PRIOR;
    @(negedge clk);
    cmd_valid = 0;
    check(cmd_ready && !busy, "PRIOR ignored");
    for (int t = 0; t < 60; t++) begin
      cmd_op = pcmd_e'(t < 3 ? t : $urandom_range(0, 2));
      cmd_data = logp_t'($urandom); cmd_blk = 4'($urandom); cmd_row = 3'($urandom);
      exp_col.delete(); exp_side.delete();
      for (int b = 0; b < 8; b++)
        for (int s = 0; s < 2; s++) begin
          bit need;
          case (cmd_op)
            PCMD_FORM:  need = 1;
            PCMD_SET:   need = (s == 0) ? cmd_data[b] : !cmd_data[b];
            default:    need = (s == 0) ? !cmd_data[b] : cmd_data[b];
          endcase
          if (need) begin exp_col.push_back(b); exp_side.push_back(s); end
        end
      exp_op = (cmd_op == PCMD_FORM) ? DEV_FORM : (cmd_op == PCMD_SET) ? DEV_SET : DEV_RESET;
      np = exp_col.size();
      rec_col.delete(); rec_side.delete(); rec_op.delete(); rec_len.delete();
      cmd_valid = 1;
      @(posedge clk);
      #1 cmd_valid = 0;
      cycles = 0;
      while (!done) begin
        check(!cmd_ready && busy && blk == cmd_blk && row == cmd_row, "busy outputs");
        @(posedge clk); #1;
        cycles++;
      end
      check(cycles == 16 + np * (P + 1), $sformatf("cycles %0d exp %0d", cycles, 16 + np * (P + 1)));
      @(posedge clk); #1;
      check(rec_col.size() == np, $sformatf("pulse count %0d exp %0d", rec_col.size(), np));
      for (int k = 0; k < np && k < rec_col.size(); k++)
        check(rec_col[k] == exp_col[k] && rec_side[k] == exp_side[k] && rec_op[k] == exp_op
              && rec_len[k] == P, $sformatf("pulse %0d: col %0d side %0d len %0d", k, rec_col[k], rec_side[k], rec_len[k]));
      check(cmd_ready && !busy, "ready after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
