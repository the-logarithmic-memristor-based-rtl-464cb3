// posterior_row: the adder chain of one class y_j.
//
// Starting from the prior code, each stage adds the likelihood code read in
// one observation column with a saturating adder, so the output is
//   log P(y_j | O_1..O_n) = prior + sum_i log P(O_i | y_j)   (clipped at 255)
// up to the common normalisation, which the machine never computes: the
// class with the smallest code is the most probable. sat reports that some
// stage of the chain clipped. Combinational, like the paper's chain of
// near-memory adders, one adder per likelihood block (the paper's
// structure); the sat output is this design's.
module posterior_row
  import bm_pkg::*;
#(
  parameter int unsigned N_OBS = 4
) (
  input  logp_t prior,
  input  logp_t llh [N_OBS],
  output logp_t post,
  output logic  sat
);

  logp_t acc [N_OBS+1];
  logic  ovf [N_OBS];

  assign acc[0] = prior;

  for (genvar i = 0; i < N_OBS; i++) begin : g_stage
    log_sat_adder #(.W(LOG_W)) u_add (
      .a   (acc[i]),
      .b   (llh[i]),
      .sum (acc[i+1]),
      .ovf (ovf[i])
    );
  end

  assign post = acc[N_OBS];

  always_comb begin
    sat = 1'b0;
    for (int i = 0; i < int'(N_OBS); i++) sat = sat | ovf[i];
  end

endmodule
