// bm_pkg: types and constants shared by the logarithmic Bayesian machine.
//
// A probability p is held as an unsigned integer n with p ~ (1/2)^(n/8), so
// n = 0 is certainty, each step of 8 halves the probability and n = 255 is
// the smallest codable probability, (1/2)^(255/8) ~ 2.5e-10. Multiplying
// probabilities becomes adding codes; a sum past 255 clips to 255. The 8-bit
// width, base 1/2 and divisor 8 follow the paper; everything else in this
// package (the programming opcodes, the command encoding) is this design's own.
package bm_pkg;

  localparam int unsigned LOG_W    = 8;              // width of a log-probability code
  localparam logic [LOG_W-1:0] LOG_MIN_P = '1;       // 255: smallest probability

  typedef logic [LOG_W-1:0] logp_t;

  // Operation applied to one memristor by a programming pulse.
  typedef enum logic [1:0] {
    DEV_NOP   = 2'd0,
    DEV_FORM  = 2'd1,   // create the conductive filament (leaves the device in LRS)
    DEV_SET   = 2'd2,   // to the low-resistance state
    DEV_RESET = 2'd3    // to the high-resistance state
  } dev_op_e;

  // Which memristor of a 2T2R cell: the one on the bit line or on its complement.
  typedef enum logic {
    SIDE_BL  = 1'b0,
    SIDE_BLB = 1'b1
  } side_e;

  // Word-level programming command accepted by the programming controller.
  //   FORM  : form both memristors of every bit of the word
  //   SET   : SET the memristors that must end in LRS for the given data
  //   RESET : RESET the memristors that must end in HRS for the given data
  // SET and RESET are separate commands because they need different supply
  // voltages, which the host changes between the two passes.
  typedef enum logic [1:0] {
    PCMD_FORM  = 2'd0,
    PCMD_SET   = 2'd1,
    PCMD_RESET = 2'd2,
    PCMD_PRIOR = 2'd3   // write a prior register (no memristor involved)
  } pcmd_e;

  // Saturating sum of two log-probability codes.
  function automatic logp_t log_mul(logp_t a, logp_t b);
    logic [LOG_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[LOG_W] ? LOG_MIN_P : s[LOG_W-1:0];
  endfunction

endpackage
