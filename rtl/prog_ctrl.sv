// prog_ctrl: programming sequencer for the memristor arrays.
//
// One command writes one 8-bit word (one row of one likelihood array). The
// word's memristors are visited one at a time, bit 0 BL, bit 0 BLb, bit 1
// BL, ..., and each device that the command concerns gets one pulse of
// PULSE_CYCLES clock cycles followed by one idle cycle, during which the
// array applies the change:
//   PCMD_FORM  : every device of the word (16 pulses)
//   PCMD_SET   : the devices that must end in the low-resistance state,
//                BL where the data bit is 1, BLb where it is 0 (8 pulses)
//   PCMD_RESET : the devices that must end in the high-resistance state,
//                BL where the data bit is 0, BLb where it is 1 (8 pulses)
// So a word is written by one FORM (once in the chip's life), then a SET
// pass and a RESET pass; the host sets the supplies VDDC/VDDR for the
// operation before issuing the commands, since they differ per operation.
//
// Handshake: a command is taken on a cycle with cmd_valid and cmd_ready;
// cmd_ready is low while a word is being written. done pulses for one cycle
// after the last pulse of a command. While busy, blk, row, col, side, op and
// pulse drive the addressed array.
//
// Individual addressing of each memristor, forming before use, SET/RESET to
// LRS/HRS and complementary 2T2R coding follow the paper; the pulse order,
// the word-level commands and the PULSE_CYCLES default (one microsecond at
// an assumed 10 MHz clock) are this design's.
module prog_ctrl
  import bm_pkg::*;
#(
  parameter int unsigned N_BLK        = 16,
  parameter int unsigned N_ROWS       = 8,
  parameter int unsigned PULSE_CYCLES = 10,
  localparam int unsigned BW = (N_BLK > 1) ? $clog2(N_BLK) : 1,
  localparam int unsigned AW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int unsigned CB = $clog2(LOG_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  pcmd_e         cmd_op,
  input  logic [BW-1:0] cmd_blk,
  input  logic [AW-1:0] cmd_row,
  input  logp_t         cmd_data,
  output logic          done,
  // to the arrays
  output logic          busy,
  output logic [BW-1:0] blk,
  output logic [AW-1:0] row,
  output logic [CB-1:0] col,
  output side_e         side,
  output dev_op_e       op,
  output logic          pulse
);

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_PULSE, S_GAP} state_e;

  state_e        state;
  pcmd_e         cmd_q;
  logp_t         data_q;
  logic [$clog2(PULSE_CYCLES+1)-1:0] cnt;

  // Does the device at (col, side) need a pulse for this command?
  function automatic logic needs_pulse(pcmd_e c, logic bit_v, side_e s);
    case (c)
      PCMD_FORM:  return 1'b1;
      PCMD_SET:   return (s == SIDE_BL) ? bit_v : ~bit_v;
      PCMD_RESET: return (s == SIDE_BL) ? ~bit_v : bit_v;
      default:    return 1'b0;
    endcase
  endfunction

  // Device index: bit number in the upper bits, side (BL = 0, BLb = 1) in bit 0.
  logic [CB:0] dev;
  logic        last_dev;
  assign col      = dev[CB:1];
  assign side     = side_e'(dev[0]);
  assign last_dev = (dev == '1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cmd_q  <= PCMD_FORM;
      data_q <= '0;
      blk    <= '0;
      row    <= '0;
      dev    <= '0;
      cnt    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid && cmd_op != PCMD_PRIOR) begin
          cmd_q  <= cmd_op;
          data_q <= cmd_data;
          blk    <= cmd_blk;
          row    <= cmd_row;
          dev    <= '0;
          state  <= S_CHECK;
        end
        S_CHECK: begin
          if (needs_pulse(cmd_q, data_q[col], side)) begin
            cnt   <= '0;
            state <= S_PULSE;
          end else if (last_dev) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            dev <= dev + 1'b1;
          end
        end
        S_PULSE: begin
          cnt <= cnt + 1'b1;
          if (cnt == $bits(cnt)'(PULSE_CYCLES - 1)) state <= S_GAP;
        end
        S_GAP: begin
          if (last_dev) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            dev <= dev + 1'b1;
            state <= S_CHECK;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    cmd_ready = (state == S_IDLE);
    busy      = (state != S_IDLE);
    pulse     = (state == S_PULSE);
    case (cmd_q)
      PCMD_FORM:  op = DEV_FORM;
      PCMD_SET:   op = DEV_SET;
      PCMD_RESET: op = DEV_RESET;
      default:    op = DEV_NOP;
    endcase
  end

endmodule
