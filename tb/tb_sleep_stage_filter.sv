// tb_sleep_stage_filter: the sleep-stage classification workload on the
// machine at its default size, run as a Bayesian filter.
//
// Column 0 holds the transition model log P(Y(t) = j | Y(t-1) = k) in rows
// k = 0..3, plus row 4 for "no previous decision" (used at t = 0); rows 5-7
// stay unprogrammed. Columns 1-3 hold log P(EEG_delta | j), log P(EEG_alpha |
// j) and log P(EMG | j) over 8 bins. Classes: 0 awake, 1 light sleep, 2 deep
// sleep, 3 REM. The recorded sleep data are not available here, so the
// model and a 1000-step night are synthetic: a sticky Markov chain of
// stages, and per-stage observation distributions that follow the
// textbook markers (alpha waves and high muscle tone when awake, low tone
// in REM, delta waves in deep sleep). Probabilities are coded as
// n = round(-8 log2 p), clipped to 255.
//
// Checks: every posterior equals a reference computed here from the same
// code tables (sum clipped at 255); results arrive one cycle after each
// request; the filtered decisions beat chance clearly (accuracy > 0.5 with
// four classes). The accuracy is printed.
module tb_sleep_stage_filter;
  import bm_pkg::*;
  localparam int NO = 4, NC = 4, NR = 8, T = 1000;
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
  real pobs [3][NC][NR];          // P(bin | stage) for the three observations
  real ptr [NC + 1][NC];          // P(Y(t) = j | Y(t-1) = k), k = NC is "unknown"
  logic [7:0] tbl [NC][NO][NR];   // codes held by the machine ([class][column][row])
  int present [NO];               // rows in use per column

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic logic [7:0] code(real p);
    real n;
    if (p <= 0.0) return 8'd255;
    n = -8.0 * $ln(p) / $ln(2.0);
    if (n > 255.0) return 8'd255;
    return 8'($rtoi(n + 0.5));
  endfunction

  // discretised bell over NR bins centred on mu
  task automatic bell(int o, int j, real mu, real sig);
    real s = 0.0;
    for (int b = 0; b < NR; b++) begin
      pobs[o][j][b] = $exp(-0.5 * ((b - mu) / sig) ** 2) + 0.01;
      s += pobs[o][j][b];
    end
    for (int b = 0; b < NR; b++) pobs[o][j][b] /= s;
  endtask

  function automatic int sample(real p [NR], int n);
    real u = real'($urandom_range(0, 999999)) / 1000000.0;
    real c = 0.0;
    for (int b = 0; b < n; b++) begin
      c += p[b];
      if (u < c) return b;
    end
    return n - 1;
  endfunction

  task automatic command(int op, int cls, int col, int row, logic [7:0] data);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = 2'(op); cmd_cls = 2'(cls); cmd_col = 2'(col); cmd_row = 3'(row); cmd_data = data;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
  endtask

  initial begin
    int prev, stage, correct, best;
    real prow [NR];
    for (int i = 0; i < NO; i++) obs[i] = 0;
    // model: stages 0 awake, 1 light, 2 deep, 3 REM
    for (int k = 0; k <= NC; k++)
      for (int j = 0; j < NC; j++)
        ptr[k][j] = (k == NC) ? 0.25 : (k == j) ? 0.94 : 0.02;
    //        EEG delta        EEG alpha        EMG
    bell(0, 0, 1.5, 1.2); bell(1, 0, 5.5, 1.2); bell(2, 0, 6.0, 1.0);
    bell(0, 1, 3.0, 1.5); bell(1, 1, 4.0, 1.5); bell(2, 1, 3.5, 1.2);
    bell(0, 2, 6.0, 1.0); bell(1, 2, 2.0, 1.2); bell(2, 2, 3.5, 1.2);
    bell(0, 3, 2.5, 1.5); bell(1, 3, 2.5, 1.5); bell(2, 3, 1.0, 0.8);
    present[0] = NC + 1; present[1] = NR; present[2] = NR; present[3] = NR;
    for (int j = 0; j < NC; j++) begin
      for (int k = 0; k <= NC; k++) tbl[j][0][k] = code(ptr[k][j]);
      for (int o = 0; o < 3; o++)
        for (int b = 0; b < NR; b++) tbl[j][o+1][b] = code(pobs[o][j][b]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < 3; op++)
      for (int j = 0; j < NC; j++)
        for (int i = 0; i < NO; i++)
          for (int r = 0; r < present[i]; r++)
            command(op, j, i, r, tbl[j][i][r]);
    // the night
    stage = 1; prev = NC; correct = 0;
    for (int t = 0; t < T; t++) begin
      int o [NO];
      if (t > 0) begin
        real ps [NR];
        for (int j = 0; j < NR; j++) ps[j] = (j < NC) ? ptr[stage][j] : 0.0;
        stage = sample(ps, NC);
      end
      o[0] = prev;
      for (int k = 0; k < 3; k++) begin
        for (int b = 0; b < NR; b++) prow[b] = pobs[k][stage][b];
        o[k+1] = sample(prow, NR);
      end
      @(negedge clk);
      for (int i = 0; i < NO; i++) obs[i] = 3'(o[i]);
      infer_valid = 1;
      @(negedge clk);
      infer_valid = 0;
      check(post_valid, "result one cycle after the request");
      for (int j = 0; j < NC; j++) begin
        int acc;
        acc = 0;
        for (int i = 0; i < NO; i++) begin
          acc += int'(tbl[j][i][o[i]]);
          if (acc > 255) acc = 255;
        end
        check(int'(post[j]) == acc, $sformatf("t=%0d class %0d post %0d exp %0d", t, j, post[j], acc));
      end
      best = 0;
      for (int j = 1; j < NC; j++) if (post[j] < post[best]) best = j;
      if (best == stage) correct++;
      prev = best;
    end
    $display("sleep-stage filter: %0d of %0d steps classified correctly (%0.1f%%)",
             correct, T, 100.0 * correct / T);
    check(correct * 2 > T, "accuracy above 50%");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
