// edac_pkg: constants and types shared by the configuration-memory EDAC
// blocks (parity engine, scheduler, controller).
//
// Fixed-point convention of the scheduler: ratios (1/P, eta_i/eta,
// criticality) are unsigned fractions with FRAC_W fractional bits; user
// weights w_a..w_d lie in [0,1] and are WGT_W-bit numbers where WGT_ONE
// stands for 1.0.  Times are counted in clock cycles (the paper's X/t).
package edac_pkg;

  localparam int unsigned WORD_W  = 32;   // configuration port word width
  localparam int unsigned TIME_W  = 24;   // cycle counts (E_i, I_i, EC_i+RT_i)
  localparam int unsigned ST_W    = TIME_W + 1;  // St_i holds up to E_i + I_i
  localparam int unsigned FRAC_W  = 24;   // fractional bits of ratios
  localparam int unsigned RATIO_W = FRAC_W + 1;  // ratio in [0, 1.0]
  localparam int unsigned WGT_W   = 9;
  localparam logic [WGT_W-1:0] WGT_ONE = 9'd256;
  localparam int unsigned FP_W    = 64;   // final priority

  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [TIME_W-1:0]  time_t;
  typedef logic [ST_W-1:0]    st_t;
  typedef logic [RATIO_W-1:0] ratio_t;
  typedef logic [WGT_W-1:0]   wgt_t;
  typedef logic [FP_W-1:0]    fp_t;

  // The four user weights of the final-priority formula.
  typedef struct packed {
    wgt_t wa;   // weight of 1/P_i (urgency)
    wgt_t wb;   // weight of eta_i/eta (share of configuration frames)
    wgt_t wc;   // weight of criticality zeta_i
    wgt_t wd;   // weight of execution time E_i
  } weights_t;

endpackage
