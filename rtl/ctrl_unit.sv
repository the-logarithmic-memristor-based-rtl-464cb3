// ctrl_unit: the digital control unit of the machine.
//
// It has two jobs.
// Inference: when infer_valid is high and the machine is not programming
// (infer_ready), it hands observation O_i to column i as the row address of
// every likelihood block of that column and raises sense_en, so all
// likelihood words are sensed on that clock edge. The adder chains are
// combinational behind the sense amplifiers, so the posteriors are valid
// the next cycle, flagged by a one-cycle post_valid: one clock cycle per
// inference, with a new observation vector accepted every cycle.
// Programming: commands (cmd_valid / cmd_ready) either write a prior
// register in one cycle (PCMD_PRIOR, class cmd_cls, value cmd_data) or are
// passed to the programming sequencer, which pulses the memristors of row
// cmd_row of the block at (class cmd_cls, column cmd_col); this unit decodes
// that block number into the one-hot prog_sel. A command must stay valid
// and unchanged until it is accepted (checked by assertions). Inference is
// refused while the sequencer is busy.
//
// The unit driving O_1..O_n into the columns is the paper's (its "Digital
// Control Unit"); the command set, the handshakes and the refusal of reads
// during programming are this design's.
module ctrl_unit
  import bm_pkg::*;
#(
  parameter int unsigned N_OBS        = 4,
  parameter int unsigned N_CLASSES    = 4,
  parameter int unsigned N_ROWS       = 8,
  parameter int unsigned PULSE_CYCLES = 10,
  localparam int unsigned N_BLK = N_OBS * N_CLASSES,
  localparam int unsigned BW = (N_BLK > 1) ? $clog2(N_BLK) : 1,
  localparam int unsigned OW = (N_OBS > 1) ? $clog2(N_OBS) : 1,
  localparam int unsigned KW = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned AW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int unsigned CB = $clog2(LOG_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host commands
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  pcmd_e         cmd_op,
  input  logic [KW-1:0] cmd_cls,
  input  logic [OW-1:0] cmd_col,
  input  logic [AW-1:0] cmd_row,
  input  logp_t         cmd_data,
  output logic          cmd_done,
  // inference requests
  input  logic          infer_valid,
  output logic          infer_ready,
  input  logic [AW-1:0] obs [N_OBS],
  output logic          post_valid,
  // to the likelihood blocks
  output logic          sense_en,
  output logic [AW-1:0] rd_addr [N_OBS],
  output logic [N_BLK-1:0] prog_sel,
  output logic [AW-1:0] prog_row,
  output logic [CB-1:0] prog_col,
  output side_e         prog_side,
  output dev_op_e       prog_op,
  output logic          prog_pulse,
  // to the prior registers
  output logic          prior_we,
  output logic [KW-1:0] prior_widx,
  output logp_t         prior_wdata
);

  logic          seq_ready, seq_busy, seq_done;
  logic [BW-1:0] seq_blk;
  logic [BW-1:0] cmd_blk;

  // Block number: class-major, block (j, i) = j * N_OBS + i.
  assign cmd_blk = BW'(cmd_cls) * BW'(N_OBS) + BW'(cmd_col);

  prog_ctrl #(.N_BLK(N_BLK), .N_ROWS(N_ROWS), .PULSE_CYCLES(PULSE_CYCLES)) u_seq (
    .clk       (clk),
    .rst_n     (rst_n),
    .cmd_valid (cmd_valid && cmd_op != PCMD_PRIOR),
    .cmd_ready (seq_ready),
    .cmd_op    (cmd_op),
    .cmd_blk   (cmd_blk),
    .cmd_row   (cmd_row),
    .cmd_data  (cmd_data),
    .done      (seq_done),
    .busy      (seq_busy),
    .blk       (seq_blk),
    .row       (prog_row),
    .col       (prog_col),
    .side      (prog_side),
    .op        (prog_op),
    .pulse     (prog_pulse)
  );

  assign cmd_ready   = seq_ready;
  assign prior_we    = cmd_valid && cmd_ready && cmd_op == PCMD_PRIOR;
  assign prior_widx  = cmd_cls;
  assign prior_wdata = cmd_data;

  always_comb begin
    prog_sel = '0;
    if (seq_busy) prog_sel[seq_blk] = 1'b1;
  end

  assign infer_ready = !seq_busy;
  assign sense_en    = infer_valid && infer_ready;

  for (genvar i = 0; i < N_OBS; i++) begin : g_col
    assign rd_addr[i] = obs[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      post_valid <= 1'b0;
      cmd_done   <= 1'b0;
    end else begin
      post_valid <= sense_en;
      cmd_done   <= seq_done || prior_we;
    end
  end

  // Host handshake rules.
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_op) && $stable(cmd_data)
                                && $stable(cmd_cls) && $stable(cmd_col) && $stable(cmd_row));
  a_infer_hold: assert property (@(posedge clk) disable iff (!rst_n)
    infer_valid && !infer_ready |=> infer_valid);
  a_no_read_while_prog: assert property (@(posedge clk) disable iff (!rst_n)
    !(sense_en && seq_busy));

endmodule
