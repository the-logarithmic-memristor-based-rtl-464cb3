// likelihood_block: one likelihood memory of the machine, holding
// log P(O_i = v | Y = y_j) for every value v of one observation O_i and one
// class y_j, one 8-bit code per row.
//
// It joins a row decoder, a 2T2R memristor array and its bank of precharge
// sense amplifiers. In inference the observation value rd_addr selects the
// row and the word is sensed on the clock edge where sense_en is high; llh
// then holds it from the next cycle on. In programming (prog_sel high) the
// decoder takes prog_row instead and prog_pulse reaches the array, which
// changes the device picked by prog_col / prog_side at the end of the pulse.
// The block structure (decoder, array, one sense amplifier per column)
// follows the paper; the address multiplexing between the two uses is this
// design's choice.
module likelihood_block
  import bm_pkg::*;
#(
  parameter int unsigned N_ROWS      = 8,
  parameter int unsigned W           = 8,
  parameter int unsigned T_PULSE_MIN = 4,
  localparam int unsigned AW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1
) (
  input  logic            clk,
  // inference read
  input  logic            sense_en,
  input  logic [AW-1:0]   rd_addr,
  output logic [W-1:0]    llh,
  // programming
  input  logic            prog_sel,
  input  logic [AW-1:0]   prog_row,
  input  logic [$clog2(W)-1:0] prog_col,
  input  side_e           prog_side,
  input  dev_op_e         prog_op,
  input  logic            prog_pulse
);

  logic [N_ROWS-1:0] wl;
  logic [W-1:0]      bl_lrs, blb_lrs;

  row_decoder #(.N_ROWS(N_ROWS)) u_dec (
    .en   (sense_en | prog_sel),
    .addr (prog_sel ? prog_row : rd_addr),
    .wl   (wl)
  );

  rram_2t2r_array #(.N_ROWS(N_ROWS), .W(W), .T_PULSE_MIN(T_PULSE_MIN)) u_array (
    .clk        (clk),
    .wl         (wl),
    .prog_pulse (prog_pulse & prog_sel),
    .prog_op    (prog_op),
    .prog_col   (prog_col),
    .prog_side  (prog_side),
    .bl_lrs     (bl_lrs),
    .blb_lrs    (blb_lrs)
  );

  pcsa_bank #(.W(W)) u_sa (
    .clk      (clk),
    .sense_en (sense_en & ~prog_sel),
    .bl_lrs   (bl_lrs),
    .blb_lrs  (blb_lrs),
    .q        (llh)
  );

endmodule
