// prior_regs: the prior log-probabilities log P(Y = y_j), one 8-bit register
// per class, each feeding the first adder of its class's adder chain.
//
// Written one register per cycle through we / widx / wdata; read in
// parallel on prior. Reset clears every register to 0, the code of
// probability 1, so a machine whose priors are never written (the sleep
// stage set-up, where the prior role is played by the first observation
// column) adds nothing. The prior block per class is the paper's; keeping it
// in flip-flops rather than memristors, and the reset value, are this
// design's choices.
module prior_regs
  import bm_pkg::*;
#(
  parameter int unsigned N_CLASSES = 4,
  localparam int unsigned CW = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [CW-1:0] widx,
  input  logp_t         wdata,
  output logp_t         prior [N_CLASSES]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(N_CLASSES); j++) prior[j] <= '0;
    end else if (we) begin
      prior[widx] <= wdata;
    end
  end

endmodule
