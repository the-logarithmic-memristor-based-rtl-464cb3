// row_decoder: binary row address to one-hot word-line select.
//
// In inference the address is an observation value O_i, which picks the row
// of the likelihood array that holds log P(O_i | Y_j); in programming it is
// the row of the word being written. With en low no word line is driven
// (the arrays are then precharged / idle). Combinational. The paper only
// names decoders among the digital circuits; this plain enable-gated decoder
// is this design's choice.
module row_decoder #(
  parameter int unsigned N_ROWS = 8,
  localparam int unsigned AW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1
) (
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [N_ROWS-1:0] wl
);

  always_comb begin
    wl = '0;
    for (int unsigned r = 0; r < N_ROWS; r++)
      wl[r] = en && (addr == AW'(r));
  end

endmodule
