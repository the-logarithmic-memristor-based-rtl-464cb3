// tb_prior_regs: after reset every prior reads 0; then random writes are
// applied and a shadow copy in the testbench is compared with all registers
// after every clock edge. Cycles with we low must change nothing.
module tb_prior_regs;
  import bm_pkg::*;
  localparam int K = 4;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] widx = 0;
  logp_t wdata = 0;
  logp_t prior [K];
  logp_t model [K];
  int checks = 0, failures = 0;

  prior_regs #(.N_CLASSES(K)) dut (.clk(clk), .rst_n(rst_n), .we(we), .widx(widx), .wdata(wdata), .prior(prior));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int j = 0; j < K; j++) begin
      model[j] = 0;
      checks++;
      if (prior[j] != 0) begin failures++; $display("FAIL reset value %0d", j); end
    end
    for (int t = 0; t < 500; t++) begin
      we = ($urandom_range(0, 2) != 0);
      widx = 2'($urandom);
      wdata = logp_t'($urandom);
      @(posedge clk);
      if (we) model[widx] = wdata;
      #1;
      for (int j = 0; j < K; j++) begin
        checks++;
        if (prior[j] != model[j]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d class %0d got %0d exp %0d", t, j, prior[j], model[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
