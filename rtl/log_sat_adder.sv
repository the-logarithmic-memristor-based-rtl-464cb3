// log_sat_adder: near-memory adder of two log-probability codes.
//
// Adding two codes n_a + n_b multiplies the probabilities they stand for
// (p ~ (1/2)^(n/8)). When the true sum does not fit in W bits the output is
// forced to all ones (255 for W = 8), the code of the smallest probability,
// instead of wrapping round to a large probability. The W = 8 default and the
// clip-to-255 rule are the paper's; the extra ovf flag (the carry out) is
// this design's, used to observe saturation.
//
// Purely combinational: sum and ovf follow a and b in the same cycle.
module log_sat_adder #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] sum,
  output logic         ovf
);

  logic [W:0] full;

  always_comb begin
    full = {1'b0, a} + {1'b0, b};
    ovf  = full[W];
    sum  = ovf ? {W{1'b1}} : full[W-1:0];
  end

endmodule
