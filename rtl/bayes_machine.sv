// bayes_machine: logarithmic memristor-based Bayesian machine, top level.
//
// It infers the class y of a variable Y from N_OBS discrete observations:
//   log P(y_j | O_1..O_n) = log P(y_j) + sum_i log P(O_i | y_j)  (+ const)
// with every probability held as an 8-bit code n, p ~ (1/2)^(n/8).
// The likelihood log P(O_i = v | y_j) sits in row v of the memristor array
// at (class j, column i); an N_CLASSES x N_OBS grid of such arrays (4 x 4,
// 8 rows each, in the fabricated configuration) is read all at once, the
// observation O_i addressing every array of column i. Along each class row
// a chain of saturating 8-bit adders accumulates prior and likelihoods into
// post[j]. The smallest post[j] marks the most probable class; picking it is
// left to the host, which for a Bayesian filter (the sleep-stage use) feeds
// it back as the next cycle's first observation.
//
// Interface:
//   cmd_*      programming: FORM / SET / RESET of one 8-bit word of one
//              array, or a prior write (see prog_ctrl and ctrl_unit).
//              cmd_op encodes 0 FORM, 1 SET, 2 RESET, 3 PRIOR.
//   prog_busy  a word is being programmed; the supplies VDDR / VDDC must
//              then be at the level for the operation (set off-chip).
//   infer_*    one inference per accepted cycle; post / post_sat are valid
//              in the cycle where post_valid is high (one cycle later) and
//              hold until the next read. post_sat[j] says the chain of
//              class j clipped at 255.
// The grid, the 8-bit codes, the clip-to-255 adders and the per-class
// prior follow the paper; the command interface, the parallel ports in
// place of the chip's pads, and the argmax being left to the host are this
// design's choices.
module bayes_machine
  import bm_pkg::*;
#(
  parameter int unsigned N_OBS        = 4,
  parameter int unsigned N_CLASSES    = 4,
  parameter int unsigned N_ROWS       = 8,
  parameter int unsigned PULSE_CYCLES = 10,
  parameter int unsigned T_PULSE_MIN  = 4,
  localparam int unsigned OW = (N_OBS > 1) ? $clog2(N_OBS) : 1,
  localparam int unsigned KW = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned AW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int unsigned CB = $clog2(LOG_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  // programming
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  logic [1:0]    cmd_op,
  input  logic [KW-1:0] cmd_cls,
  input  logic [OW-1:0] cmd_col,
  input  logic [AW-1:0] cmd_row,
  input  logic [LOG_W-1:0] cmd_data,
  output logic          cmd_done,
  output logic          prog_busy,
  // inference
  input  logic          infer_valid,
  output logic          infer_ready,
  input  logic [AW-1:0] obs [N_OBS],
  output logic          post_valid,
  output logic [LOG_W-1:0] post [N_CLASSES],
  output logic [N_CLASSES-1:0] post_sat
);

  localparam int unsigned N_BLK = N_OBS * N_CLASSES;

  logic          sense_en;
  logic [AW-1:0] rd_addr [N_OBS];
  logic [N_BLK-1:0] prog_sel;
  logic [AW-1:0] prog_row;
  logic [CB-1:0] prog_col;
  side_e         prog_side;
  dev_op_e       prog_op;
  logic          prog_pulse;
  logic          prior_we;
  logic [KW-1:0] prior_widx;
  logp_t         prior_wdata;
  logp_t         prior [N_CLASSES];

  ctrl_unit #(
    .N_OBS(N_OBS), .N_CLASSES(N_CLASSES), .N_ROWS(N_ROWS), .PULSE_CYCLES(PULSE_CYCLES)
  ) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .cmd_valid   (cmd_valid),
    .cmd_ready   (cmd_ready),
    .cmd_op      (pcmd_e'(cmd_op)),
    .cmd_cls     (cmd_cls),
    .cmd_col     (cmd_col),
    .cmd_row     (cmd_row),
    .cmd_data    (cmd_data),
    .cmd_done    (cmd_done),
    .infer_valid (infer_valid),
    .infer_ready (infer_ready),
    .obs         (obs),
    .post_valid  (post_valid),
    .sense_en    (sense_en),
    .rd_addr     (rd_addr),
    .prog_sel    (prog_sel),
    .prog_row    (prog_row),
    .prog_col    (prog_col),
    .prog_side   (prog_side),
    .prog_op     (prog_op),
    .prog_pulse  (prog_pulse),
    .prior_we    (prior_we),
    .prior_widx  (prior_widx),
    .prior_wdata (prior_wdata)
  );

  assign prog_busy = |prog_sel;

  prior_regs #(.N_CLASSES(N_CLASSES)) u_prior (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (prior_we),
    .widx  (prior_widx),
    .wdata (prior_wdata),
    .prior (prior)
  );

  for (genvar j = 0; j < N_CLASSES; j++) begin : g_class
    logp_t llh [N_OBS];

    for (genvar i = 0; i < N_OBS; i++) begin : g_obs
      likelihood_block #(.N_ROWS(N_ROWS), .W(LOG_W), .T_PULSE_MIN(T_PULSE_MIN)) u_blk (
        .clk        (clk),
        .sense_en   (sense_en),
        .rd_addr    (rd_addr[i]),
        .llh        (llh[i]),
        .prog_sel   (prog_sel[j*N_OBS + i]),
        .prog_row   (prog_row),
        .prog_col   (prog_col),
        .prog_side  (prog_side),
        .prog_op    (prog_op),
        .prog_pulse (prog_pulse)
      );
    end

    posterior_row #(.N_OBS(N_OBS)) u_row (
      .prior (prior[j]),
      .llh   (llh),
      .post  (post[j]),
      .sat   (post_sat[j])
    );
  end

endmodule
