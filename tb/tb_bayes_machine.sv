// tb_bayes_machine: end-to-end test of the machine at its default size
// (4 observation columns x 4 classes, 8-row arrays), acting as the host.
//  1. Programs every word of all 16 arrays with the three passes a real
//     chip needs: FORM every device, then SET, then RESET (on silicon the
//     host changes VDDC/VDDR between passes). Likelihood codes are random,
//     a few of them large so that some sums clip.
//  2. Writes random priors.
//  3. Issues random observation vectors back to back, one per cycle, and
//     checks post and post_sat against a reference computed here from the
//     host's own copy of the tables: prior + sum of likelihoods, clipped at
//     255 after each addition. Checks that post_valid comes one cycle
//     after the request.
//  4. Rewrites one word while reads are requested: the reads must be held
//     off until programming ends, and the new word must then be read.
//  5. Runs the machine as a Bayesian filter, as in the sleep-stage use:
//     priors cleared, column 0 addressed by the previous decision (row 4 =
//     "unknown" for the first step), the class with the smallest code fed
//     back each step.
// Each mechanism (form, set, reset, prior write, inference, saturation,
// read held off by programming, filter feedback) is counted, and one that
// never happened counts as a failure.
module tb_bayes_machine;
  import bm_pkg::*;
  localparam int NO = 4, NC = 4, NR = 8;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_done, prog_busy;
  logic [1:0] cmd_op = 0, cmd_cls = 0, cmd_col = 0;
  logic [2:0] cmd_row = 0;
  logic [7:0] cmd_data = 0;
  logic infer_valid = 0, infer_ready, post_valid;
  logic [2:0] obs [NO];
  logic [7:0] post [NC];
  logic [NC-1:0] post_sat;

  bayes_machine dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_cls(cmd_cls), .cmd_col(cmd_col), .cmd_row(cmd_row), .cmd_data(cmd_data),
    .cmd_done(cmd_done), .prog_busy(prog_busy), .infer_valid(infer_valid),
    .infer_ready(infer_ready), .obs(obs), .post_valid(post_valid), .post(post), .post_sat(post_sat));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_form = 0, n_set = 0, n_reset = 0, n_prior = 0, n_infer = 0, n_sat = 0, n_held = 0, n_filter = 0;
  logic [7:0] tbl [NC][NO][NR];
  logic [7:0] pri [NC];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic command(int op, int cls, int col, int row, logic [7:0] data);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = 2'(op); cmd_cls = 2'(cls); cmd_col = 2'(col); cmd_row = 3'(row); cmd_data = data;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
    case (op)
      0: n_form++;
      1: n_set++;
      2: n_reset++;
      default: n_prior++;
    endcase
  endtask

  function automatic int ref_post(int j, int o [NO], output bit sat);
    int acc = int'(pri[j]);
    sat = 0;
    for (int i = 0; i < NO; i++) begin
      acc += int'(tbl[j][i][o[i]]);
      if (acc > 255) begin acc = 255; sat = 1; end
    end
    return acc;
  endfunction

  // one read: request at a negedge, result checked after the next posedge
  task automatic infer_check(int o [NO]);
    bit s;
    int e;
    for (int i = 0; i < NO; i++) obs[i] = 3'(o[i]);
    infer_valid = 1;
    @(negedge clk);
    infer_valid = 0;
    check(post_valid, "post_valid one cycle after the request");
    for (int j = 0; j < NC; j++) begin
      e = ref_post(j, o, s);
      check(int'(post[j]) == e && post_sat[j] == s,
            $sformatf("class %0d post %0d exp %0d sat %0d/%0d", j, post[j], e, post_sat[j], s));
      if (s) n_sat++;
    end
    n_infer++;
  endtask

  initial begin
    int o [NO];
    for (int i = 0; i < NO; i++) obs[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. tables
    for (int j = 0; j < NC; j++)
      for (int i = 0; i < NO; i++)
        for (int r = 0; r < NR; r++)
          tbl[j][i][r] = ($urandom_range(0, 9) == 0) ? 8'($urandom_range(150, 255)) : 8'($urandom_range(0, 60));
    for (int op = 0; op < 3; op++)
      for (int j = 0; j < NC; j++)
        for (int i = 0; i < NO; i++)
          for (int r = 0; r < NR; r++)
            command(op, j, i, r, tbl[j][i][r]);
    // 2. priors
    for (int j = 0; j < NC; j++) begin
      pri[j] = 8'($urandom_range(0, 40));
      command(3, j, 0, 0, pri[j]);
    end
    // 3. reads, back to back: a request every cycle, each result checked a cycle later
    @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < NO; i++) o[i] = $urandom_range(0, NR-1);
      infer_check(o);
    end
    // 4. reprogram one word while reads are requested
    begin
      int j = 2, i = 1, r = 6;
      logic [7:0] nw = ~tbl[2][1][6];
      @(negedge clk);
      cmd_valid = 1; cmd_op = 2'd1; cmd_cls = 2'(j); cmd_col = 2'(i); cmd_row = 3'(r); cmd_data = nw;
      @(negedge clk);
      cmd_valid = 0;
      infer_valid = 1;
      for (int k = 0; k < NO; k++) obs[k] = 3'(r);
      while (!cmd_done) begin
        #1;
        if (!infer_ready) n_held++;
        check(!post_valid || n_held == 0, "no result while programming");
        @(negedge clk);
      end
      infer_valid = 0;
      n_set++;
      command(2, j, i, r, nw);
      tbl[j][i][r] = nw;
      for (int k = 0; k < NO; k++) o[k] = (k == i) ? r : $urandom_range(0, NR-1);
      @(negedge clk);
      infer_check(o);
    end
    // 5. Bayesian filter: no priors; column 0 holds the transition model
    for (int j = 0; j < NC; j++) begin
      pri[j] = 0;
      command(3, j, 0, 0, 8'd0);
    end
    begin
      int prev = 4;   // "unknown" row for the first step
      for (int t = 0; t < 200; t++) begin
        int best;
        o[0] = prev;
        for (int i = 1; i < NO; i++) o[i] = $urandom_range(0, NR-1);
        @(negedge clk);
        infer_check(o);
        best = 0;
        for (int j = 1; j < NC; j++) if (post[j] < post[best]) best = j;
        prev = best;
        n_filter++;
      end
    end
    check(n_form == NC*NO*NR, "form count");
    check(n_set > 0 && n_reset > 0 && n_prior > 0 && n_infer > 0, "programming and inference happened");
    check(n_sat > 0, "saturation happened");
    check(n_held > 0, "a read was held off by programming");
    check(n_filter > 0, "filter feedback happened");
    $display("mechanisms: form=%0d set=%0d reset=%0d prior=%0d infer=%0d sat=%0d held=%0d filter=%0d",
             n_form, n_set, n_reset, n_prior, n_infer, n_sat, n_held, n_filter);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
