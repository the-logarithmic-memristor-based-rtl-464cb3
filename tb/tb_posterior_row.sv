// tb_posterior_row: random priors and likelihoods, biased towards large
// codes so that saturation happens often. The expected output is a running
// sum clipped at 255 after each stage; sat is expected whenever any stage's
// unclipped sum exceeded 255.
module tb_posterior_row;
  import bm_pkg::*;
  localparam int N = 4;
  logp_t prior, post;
  logp_t llh [N];
  logic  sat;
  int checks = 0, failures = 0, n_sat = 0;

  posterior_row #(.N_OBS(N)) dut (.prior(prior), .llh(llh), .post(post), .sat(sat));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc;
    bit exp_sat;
    for (int t = 0; t < 5000; t++) begin
      prior = logp_t'($urandom_range(0, (t % 2) ? 40 : 255));
      for (int i = 0; i < N; i++) llh[i] = logp_t'($urandom_range(0, (t % 2) ? 60 : 120));
      #1;
      acc = int'(prior); exp_sat = 0;
      for (int i = 0; i < N; i++) begin
        acc += int'(llh[i]);
        if (acc > 255) begin acc = 255; exp_sat = 1; end
      end
      if (exp_sat) n_sat++;
      checks++;
      if (int'(post) != acc || sat != exp_sat) begin
        failures++;
        if (failures < 10) $display("FAIL post=%0d exp=%0d sat=%0d", post, acc, sat);
      end
    end
    checks++;
    if (n_sat == 0 || n_sat == 5000) begin failures++; $display("saturation coverage missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
