// cnash_pkg: constants, types and constant functions shared by the C-Nash
// solver. The default game size (8 actions per player) is the largest game the
// solver is evaluated on; the quantisation I = 4 intervals and t = 4 cells per
// payoff element are the worked example of the crossbar mapping. Everything
// else here (temperature format, random-number width, the -ln(u) table used
// for the Metropolis test) is this implementation's own choice.
package cnash_pkg;

  timeunit 1ns;
  timeprecision 1ps;

  // Default problem geometry.
  localparam int unsigned N_ACT_DEF  = 8;  // actions of player 1 (rows of M)
  localparam int unsigned M_ACT_DEF  = 8;  // actions of player 2 (columns of M)
  localparam int unsigned I_INT_DEF  = 4;  // probability intervals: p_i in {0, 1/I, ..., 1}
  localparam int unsigned T_CELL_DEF = 4;  // one-bit cells per payoff element (max element value)

  // Temperature: unsigned fixed point with T_FRAC fractional bits (Q16.16 in a
  // 32-bit register), in the same unit as the objective code (one unit = one
  // cell ON current).
  localparam int unsigned T_FRAC = 16;
  // Decay factor alpha: T <- T * alpha / 2^ALPHA_W.
  localparam int unsigned ALPHA_W = 16;

  // Metropolis acceptance uses L = -ln(u), u uniform in (0,1), drawn from a
  // table of 2^U_W entries in Q4.8; an uphill move dE is accepted when
  // dE <= T * L, which happens with probability exp(-dE/T).
  localparam int unsigned U_W    = 8;
  localparam int unsigned LN_W   = 12;
  localparam int unsigned LN_FRAC = 8;

  typedef logic [LN_W-1:0] neg_ln_tab_t [2**U_W];

  // Entry k holds round(-ln((k + 0.5) / 2^U_W) * 2^LN_FRAC).
  function automatic neg_ln_tab_t neg_ln_table();
    neg_ln_tab_t t;
    for (int k = 0; k < 2**U_W; k++)
      t[k] = LN_W'(int'(-$ln((real'(k) + 0.5) / real'(2**U_W)) * real'(2**LN_FRAC)));
    return t;
  endfunction

  // ceil(log2(x)), but at least 1, for index widths.
  function automatic int unsigned idx_w(int unsigned x);
    return (x > 1) ? $clog2(x) : 1;
  endfunction

  // States of the two-phase annealing controller.
  typedef enum logic [2:0] {
    SA_IDLE = 3'd0,  // waiting for start
    SA_PH1  = 3'd1,  // Phase 1: max(Mq) and max(N^T p) through the WTA trees
    SA_PH2  = 3'd2,  // Phase 2: p^T M q and p^T N q, WTA trees off
    SA_EVAL = 3'd3,  // form f, accept or reject, decay T
    SA_GEN  = 3'd4   // perturb the recorded strategy pair
  } sa_state_e;

endpackage
