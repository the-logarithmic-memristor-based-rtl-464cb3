// tb_rram_2t2r_array: drives programming pulses of random operation, target
// device and length into the array model and keeps its own copy of the 128
// device states (unformed / LRS / HRS). Rules checked: devices start
// unformed; FORM leaves a device in LRS; SET and RESET act only on formed
// devices; pulses shorter than T_PULSE_MIN change nothing; the read lines of
// every row show which devices are in LRS, and nothing when no row is
// selected.
module tb_rram_2t2r_array;
  import bm_pkg::*;
  localparam int R = 8, W = 8, TMIN = 4;
  logic clk = 0;
  logic [R-1:0] wl = '0;
  logic pulse = 0;
  dev_op_e op = DEV_NOP;
  logic [2:0] col = 0;
  side_e side = SIDE_BL;
  logic [W-1:0] bl, blb;
  int model [R][W][2];   // 0 unformed, 1 LRS, 2 HRS
  int checks = 0, failures = 0;
  int n_form = 0, n_short = 0, n_unformed_ignored = 0;

  rram_2t2r_array #(.N_ROWS(R), .W(W), .T_PULSE_MIN(TMIN)) dut (
    .clk(clk), .wl(wl), .prog_pulse(pulse), .prog_op(op), .prog_col(col),
    .prog_side(side), .bl_lrs(bl), .blb_lrs(blb));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int r, int c, int s, dev_op_e o, int len);
    @(negedge clk);
    wl = R'(1) << r; col = 3'(c); side = side_e'(s); op = o; pulse = 1;
    repeat (len) @(negedge clk);
    pulse = 0;
    @(negedge clk);
    wl = '0;
    if (len >= TMIN) begin
      case (o)
        DEV_FORM:  begin model[r][c][s] = 1; n_form++; end
        DEV_SET:   if (model[r][c][s] != 0) model[r][c][s] = 1; else n_unformed_ignored++;
        DEV_RESET: if (model[r][c][s] != 0) model[r][c][s] = 2; else n_unformed_ignored++;
        default: ;
      endcase
    end else n_short++;
  endtask

  task automatic check_all();
    @(negedge clk);
    wl = '0;
    #1;
    checks++;
    if (bl != 0 || blb != 0) begin failures++; $display("FAIL lines driven with no row selected"); end
    for (int r = 0; r < R; r++) begin
      wl = R'(1) << r;
      #1;
      for (int c = 0; c < W; c++) begin
        checks++;
        if (bl[c] != (model[r][c][0] == 1) || blb[c] != (model[r][c][1] == 1)) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d col %0d bl=%0d blb=%0d model=%0d/%0d",
                                      r, c, bl[c], blb[c], model[r][c][0], model[r][c][1]);
        end
      end
    end
    wl = '0;
  endtask

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < W; c++) begin model[r][c][0] = 0; model[r][c][1] = 0; end
    check_all();
    // directed: SET before forming is ignored, FORM works, a short RESET is ignored, RESET works
    apply(3, 5, 0, DEV_SET, 10);   check_all();
    apply(3, 5, 0, DEV_FORM, 10);  check_all();
    apply(3, 5, 0, DEV_RESET, 2);  check_all();
    apply(3, 5, 0, DEV_RESET, 10); check_all();
    apply(3, 5, 0, DEV_SET, TMIN); check_all();
    // random
    for (int t = 0; t < 600; t++) begin
      apply($urandom_range(0, R-1), $urandom_range(0, W-1), $urandom_range(0, 1),
            dev_op_e'($urandom_range(1, 3)), $urandom_range(1, 8));
      if (t % 10 == 0) check_all();
    end
    check_all();
    checks++;
    if (n_form == 0 || n_short == 0 || n_unformed_ignored == 0) begin
      failures++; $display("coverage missing: form=%0d short=%0d unformed=%0d", n_form, n_short, n_unformed_ignored);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
