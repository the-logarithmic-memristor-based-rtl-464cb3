// tb_gesture_scaled: the gesture-recognition workload on the scaled-up
// configuration of the machine: 6 observation columns x 4 classes, arrays
// of 64 rows (six features quantised to 64 values, four gestures). This
// size does not fit the 4 x 8-row default; it is obtained by parameters
// alone. Plain naive Bayes: priors equal (all zero codes), the class with
// the smallest posterior code wins.
//
// The recorded gestures are not available here, so the data are synthetic:
// each (gesture, feature) pair has a Gaussian over the 64 bins with a
// random centre and a fixed width; the likelihood tables are that
// distribution coded as n = round(-8 log2 p), clipped to 255, and 400 test
// gestures are drawn from it.
//
// Checks: every posterior equals a reference computed here from the code
// tables; a result arrives one cycle after each request; the accuracy is
// well above chance (> 50% for four classes). The accuracy is printed.
module tb_gesture_scaled;
  import bm_pkg::*;
  localparam int NO = 6, NC = 4, NR = 64, T = 400;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_done, prog_busy;
  logic [1:0] cmd_op = 0, cmd_cls = 0;
  logic [2:0] cmd_col = 0;
  logic [5:0] cmd_row = 0;
  logic [7:0] cmd_data = 0;
  logic infer_valid = 0, infer_ready, post_valid;
  logic [5:0] obs [NO];
  logic [7:0] post [NC];
  logic [NC-1:0] post_sat;

  bayes_machine #(.N_OBS(NO), .N_CLASSES(NC), .N_ROWS(NR)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op),
    .cmd_cls(cmd_cls), .cmd_col(cmd_col), .cmd_row(cmd_row), .cmd_data(cmd_data),
    .cmd_done(cmd_done), .prog_busy(prog_busy), .infer_valid(infer_valid),
    .infer_ready(infer_ready), .obs(obs), .post_valid(post_valid), .post(post), .post_sat(post_sat));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  real pf [NC][NO][NR];
  logic [7:0] tbl [NC][NO][NR];

  initial begin
    repeat (5000000) @(posedge clk);
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

  task automatic command(int op, int cls, int col, int row, logic [7:0] data);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = 2'(op); cmd_cls = 2'(cls); cmd_col = 3'(col); cmd_row = 6'(row); cmd_data = data;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
  endtask

  initial begin
    int correct, best, g, n_sat;
    for (int i = 0; i < NO; i++) obs[i] = 0;
    for (int j = 0; j < NC; j++)
      for (int i = 0; i < NO; i++) begin
        real mu, s;
        mu = real'($urandom_range(8, 55));
        s = 0.0;
        for (int b = 0; b < NR; b++) begin
          pf[j][i][b] = $exp(-0.5 * ((b - mu) / 7.0) ** 2) + 1e-6;
          s += pf[j][i][b];
        end
        for (int b = 0; b < NR; b++) begin
          pf[j][i][b] /= s;
          tbl[j][i][b] = code(pf[j][i][b]);
        end
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < 3; op++)
      for (int j = 0; j < NC; j++)
        for (int i = 0; i < NO; i++)
          for (int r = 0; r < NR; r++)
            command(op, j, i, r, tbl[j][i][r]);
    correct = 0; n_sat = 0;
    for (int t = 0; t < T; t++) begin
      int o [NO];
      g = $urandom_range(0, NC - 1);
      for (int i = 0; i < NO; i++) begin
        real u, c;
        u = real'($urandom_range(0, 999999)) / 1000000.0;
        c = 0.0;
        o[i] = NR - 1;
        for (int b = 0; b < NR; b++) begin
          c += pf[g][i][b];
          if (u < c) begin o[i] = b; break; end
        end
      end
      @(negedge clk);
      for (int i = 0; i < NO; i++) obs[i] = 6'(o[i]);
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
        if (acc == 255) n_sat++;
        check(int'(post[j]) == acc, $sformatf("t=%0d class %0d post %0d exp %0d", t, j, post[j], acc));
      end
      best = 0;
      for (int j = 1; j < NC; j++) if (post[j] < post[best]) best = j;
      if (best == g) correct++;
    end
    $display("gesture (scaled machine): %0d of %0d correct (%0.1f%%), %0d clipped posteriors",
             correct, T, 100.0 * correct / T, n_sat);
    check(correct * 2 > T, "accuracy above 50%");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
