// tb_ctrl_unit: checks the control unit's two paths.
// Inference: with infer_valid high and no programming in progress, sense_en
// is high in the same cycle, column i gets observation i as its row address
// and post_valid follows exactly one cycle later; idle cycles give no
// post_valid. Programming: a PRIOR command produces a one-cycle prior write
// of the right class and value; a FORM/SET/RESET command selects exactly
// the block (class * N_OBS + column) while busy, blocks inference (reads
// held off, infer_ready low) and ends with cmd_done.
module tb_ctrl_unit;
  import bm_pkg::*;
  localparam int NO = 4, NC = 4, NR = 8, P = 3;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_done;
  pcmd_e cmd_op = PCMD_PRIOR;
  logic [1:0] cmd_cls = 0, cmd_col = 0;
  logic [2:0] cmd_row = 0;
  logp_t cmd_data = 0;
  logic infer_valid = 0, infer_ready, post_valid, sense_en;
  logic [2:0] obs [NO];
  logic [2:0] rd_addr [NO];
  logic [15:0] prog_sel;
  logic [2:0] prog_row, prog_col;
  side_e prog_side;
  dev_op_e prog_op;
  logic prog_pulse, prior_we;
  logic [1:0] prior_widx;
  logp_t prior_wdata;
  int checks = 0, failures = 0;
  int n_blocked = 0;

  ctrl_unit #(.N_OBS(NO), .N_CLASSES(NC), .N_ROWS(NR), .PULSE_CYCLES(P)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_cls(cmd_cls), .cmd_col(cmd_col), .cmd_row(cmd_row), .cmd_data(cmd_data), .cmd_done(cmd_done),
    .infer_valid(infer_valid), .infer_ready(infer_ready), .obs(obs), .post_valid(post_valid),
    .sense_en(sense_en), .rd_addr(rd_addr), .prog_sel(prog_sel), .prog_row(prog_row),
    .prog_col(prog_col), .prog_side(prog_side), .prog_op(prog_op), .prog_pulse(prog_pulse),
    .prior_we(prior_we), .prior_widx(prior_widx), .prior_wdata(prior_wdata));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    bit prev_sense;
    for (int i = 0; i < NO; i++) obs[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // inference path
    prev_sense = 0;
    for (int t = 0; t < 200; t++) begin
      infer_valid = $urandom_range(0, 1) != 0;
      for (int i = 0; i < NO; i++) obs[i] = 3'($urandom);
      #1;
      check(sense_en == infer_valid && infer_ready, "sense_en follows infer_valid");
      for (int i = 0; i < NO; i++) check(rd_addr[i] == obs[i], "observation routed to its column");
      check(post_valid == prev_sense, "post_valid one cycle after the read");
      prev_sense = sense_en;
      @(negedge clk);
    end
    infer_valid = 0;
    @(negedge clk);
    // prior writes
    for (int t = 0; t < 20; t++) begin
      cmd_valid = 1; cmd_op = PCMD_PRIOR; cmd_cls = 2'($urandom); cmd_data = logp_t'($urandom);
      #1;
      check(prior_we && prior_widx == cmd_cls && prior_wdata == cmd_data && prog_sel == 0, "prior write");
      @(negedge clk);
      cmd_valid = 0;
      check(cmd_done, "done after prior write");
      #1 check(!prior_we, "prior write lasts one cycle");
      @(negedge clk);
    end
    // memristor commands
    for (int t = 0; t < 30; t++) begin
      int exp_blk, cyc;
      cmd_op = pcmd_e'($urandom_range(0, 2)); cmd_cls = 2'($urandom); cmd_col = 2'($urandom);
      cmd_row = 3'($urandom); cmd_data = logp_t'($urandom);
      exp_blk = int'(cmd_cls) * NO + int'(cmd_col);
      cmd_valid = 1;
      @(negedge clk);
      cmd_valid = 0;
      infer_valid = 1;
      cyc = 0;
      while (!cmd_done && cyc < 1000) begin
        #1;
        if (prog_sel != 0) begin
          check(prog_sel == 16'(1 << exp_blk), $sformatf("prog_sel %h for block %0d", prog_sel, exp_blk));
          check(prog_row == cmd_row, "row held");
          check(!infer_ready && !sense_en, "inference held off while programming");
          n_blocked++;
        end
        @(negedge clk);
        cyc++;
      end
      check(cmd_done, "command finished");
      infer_valid = 0;
      @(negedge clk);
      check(infer_ready, "inference allowed again");
    end
    check(n_blocked > 0, "programming cycles seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
