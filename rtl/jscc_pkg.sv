// jscc_pkg - fixed-point formats and helpers shared by the JSCC codec.
//
// Messages (channel LLRs, V2C and C2V messages, SC2CC/CC2SC messages) are 6-bit
// two's complement with 2 fractional bits (one LSB = 0.25), kept in the
// symmetric range -31..+31 so that negation never overflows. The 6-bit width is
// the published quantisation; the 2 fractional bits are this design's choice.
// A-posteriori LLRs (APP) are kept with 8 bits (same LSB), also a choice of
// this design, so that layered updates do not lose the sum of several messages.
// A message of magnitude 31 is treated as "certain" by the check-node LUT.
package jscc_pkg;
  localparam int Q      = 6;
  localparam int QA     = 8;
  localparam int FRAC   = 2;
  localparam int QMAX   = (1 << (Q - 1)) - 1;   // 31
  localparam int QAMAX  = (1 << (QA - 1)) - 1;  // 127
  localparam int Z_DEF  = 160;                  // circulant size
  localparam int SW     = 8;                    // modulator / channel sample width
  localparam int AMP    = 16;                   // BPSK amplitude 1.0 in Q4.4

  // ln((1-p)/p) for p = 0.04 is 3.18, i.e. 12.7 LSB -> 13
  localparam int SRC_PRIOR = 13;

  typedef logic signed [Q-1:0]  msg_t;
  typedef logic signed [QA-1:0] app_t;
  typedef logic signed [QA:0]   diff_t;

  typedef enum logic {SIDE_SRC = 1'b0, SIDE_CH = 1'b1} side_e;

  function automatic msg_t sat_msg(input int v);
    if (v > QMAX)       return msg_t'(QMAX);
    else if (v < -QMAX) return msg_t'(-QMAX);
    else                return msg_t'(v);
  endfunction

  function automatic app_t sat_app(input int v);
    if (v > QAMAX)       return app_t'(QAMAX);
    else if (v < -QAMAX) return app_t'(-QAMAX);
    else                 return app_t'(v);
  endfunction

  // round(4 * ln(1 + exp(-x/4))) for a magnitude x in LSBs: the correction
  // term of the exact two-input tanh rule in the 2-fractional-bit domain.
  function automatic int tanh_corr(input int x);
    if (x == 0)     return 3;
    else if (x < 4) return 2;
    else if (x < 9) return 1;
    else            return 0;
  endfunction
endpackage
