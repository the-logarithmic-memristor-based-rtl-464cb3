// rram_2t2r_array: behavioural model of one hafnium-oxide memristor array
// organised as N_ROWS words of W two-transistor/two-memristor (2T2R) cells.
// This is a behavioural model of an analog part, not synthesizable logic:
// each memristor is reduced to one of three states and the analog pulse
// physics is reduced to a minimum pulse length.
//
// Every bit is a pair of memristors, one on bit line BL and one on its
// complement BLb, programmed to opposite states: a one is BL in the
// low-resistance state (LRS) with BLb in the high-resistance state (HRS), a
// zero the reverse. A fresh device is unformed and conducts like (or worse
// than) HRS; a FORM pulse creates its filament and leaves it in LRS. SET and
// RESET pulses move a formed device to LRS and HRS; they do nothing to an
// unformed one. Memristors are non-volatile, so there is no reset: the model
// starts with every device unformed, as after fabrication.
//
// Interface and timing:
//   wl         one-hot word-line select (from the row decoder), used both to
//              read and to program.
//   prog_pulse high while a programming pulse is applied to the device
//              picked by wl, prog_col and prog_side. The state changes when
//              the pulse ends, provided it lasted at least T_PULSE_MIN
//              clock cycles; a shorter pulse is ignored.
//   bl_lrs / blb_lrs  per column, whether the memristor on BL / BLb of the
//              selected row is in LRS; all zero when no row is selected.
//              Combinational from wl, for the sense amplifiers.
// The 8x8 size and the 2T2R coding follow the paper; the three-state device
// abstraction and the minimum pulse length are this model's.
module rram_2t2r_array
  import bm_pkg::*;
#(
  parameter int unsigned N_ROWS      = 8,
  parameter int unsigned W           = 8,
  parameter int unsigned T_PULSE_MIN = 4
) (
  input  logic              clk,
  input  logic [N_ROWS-1:0] wl,
  input  logic              prog_pulse,
  input  dev_op_e           prog_op,
  input  logic [$clog2(W)-1:0] prog_col,
  input  side_e             prog_side,
  output logic [W-1:0]      bl_lrs,
  output logic [W-1:0]      blb_lrs
);

  typedef enum logic [1:0] {
    ST_UNFORMED = 2'd0,
    ST_LRS      = 2'd1,
    ST_HRS      = 2'd2
  } dev_state_e;

  dev_state_e dev [N_ROWS][W][2];   // [row][column][side]

  int unsigned pulse_len;
  logic        pulse_d;

  initial begin
    for (int r = 0; r < int'(N_ROWS); r++)
      for (int c = 0; c < int'(W); c++) begin
        dev[r][c][0] = ST_UNFORMED;
        dev[r][c][1] = ST_UNFORMED;
      end
    pulse_len = 0;
    pulse_d   = 1'b0;
  end

  function automatic dev_state_e next_state(dev_state_e s, dev_op_e op);
    case (op)
      DEV_FORM:  return ST_LRS;
      DEV_SET:   return (s == ST_UNFORMED) ? s : ST_LRS;
      DEV_RESET: return (s == ST_UNFORMED) ? s : ST_HRS;
      default:   return s;
    endcase
  endfunction

  // Pulse length is counted in clock cycles; the device switches when the
  // pulse is released.
  always @(posedge clk) begin
    pulse_d <= prog_pulse;
    if (prog_pulse)
      pulse_len <= pulse_len + 1;
    else
      pulse_len <= 0;
    if (pulse_d && !prog_pulse && pulse_len >= T_PULSE_MIN) begin
      for (int r = 0; r < int'(N_ROWS); r++)
        if (wl[r])
          dev[r][prog_col][prog_side] <= next_state(dev[r][prog_col][prog_side], prog_op);
    end
  end

  // Read path: the selected row's devices as seen by the sense amplifiers.
  always_comb begin
    bl_lrs  = '0;
    blb_lrs = '0;
    for (int r = 0; r < int'(N_ROWS); r++)
      if (wl[r])
        for (int c = 0; c < int'(W); c++) begin
          bl_lrs[c]  = bl_lrs[c]  | (dev[r][c][0] == ST_LRS);
          blb_lrs[c] = blb_lrs[c] | (dev[r][c][1] == ST_LRS);
        end
  end

endmodule
