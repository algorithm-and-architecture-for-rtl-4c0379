// polar_pkg: types and constants shared by the hybrid BP/SC polar decoder.
//
// Every log-likelihood ratio (LLR) in the datapath is carried in sign-magnitude
// form (llr_t), as the unified Type-I/Type-II blocks work on sign and magnitude
// separately and convert to two's complement only around their adder (tc_t).
// A positive LLR favours bit 0. The word length (6-bit magnitude) and the
// min-sum scaling factor (0.9375) are choices of this design; the decoder
// architecture itself does not fix them.
package polar_pkg;

  // Magnitude bits of one LLR; the stored word is MAGW+1 bits wide.
  localparam int MAGW = 6;
  // Two's-complement width inside a block: enough for the sum of two LLRs.
  localparam int TCW = MAGW + 2;

  localparam logic [MAGW-1:0] MAG_MAX = '1;

  typedef struct packed {
    logic            sgn;   // 1 = negative (favours bit 1)
    logic [MAGW-1:0] mag;
  } llr_t;

  typedef logic signed [TCW-1:0] tc_t;

  localparam llr_t LLR_ZERO = '{sgn: 1'b0, mag: '0};
  localparam llr_t LLR_POS_MAX = '{sgn: 1'b0, mag: MAG_MAX};

  // Mode select of the unified blocks (the 0/1 inputs of their muxes).
  typedef enum logic {
    MODE_SC = 1'b0,
    MODE_BP = 1'b1
  } pe_mode_e;

  // Run-time configuration of the decoder FSM.
  typedef enum logic [1:0] {
    CFG_HYBRID  = 2'd0,   // BP with early stopping, SC on the denoised LLRs if BP fails
    CFG_BP_ONLY = 2'd1,   // BP with early stopping only
    CFG_SC_ONLY = 2'd2    // SC on the channel LLRs only
  } cfg_mode_e;

  // Saturating sum of two sign-magnitude LLRs (used for soft outputs).
  function automatic llr_t llr_add_sat(llr_t a, llr_t b);
    tc_t ta, tb, s;
    logic [TCW-1:0] abs_s;
    llr_t r;
    ta = a.sgn ? -tc_t'({2'b00, a.mag}) : tc_t'({2'b00, a.mag});
    tb = b.sgn ? -tc_t'({2'b00, b.mag}) : tc_t'({2'b00, b.mag});
    s = ta + tb;
    abs_s = s[TCW-1] ? -s : s;
    r.sgn = s[TCW-1];
    r.mag = (abs_s > TCW'(MAG_MAX)) ? MAG_MAX : abs_s[MAGW-1:0];
    return r;
  endfunction

  // Hard decision: 1 for a negative LLR.
  function automatic logic llr_hard(llr_t a);
    return a.sgn && (a.mag != '0);
  endfunction

endpackage
