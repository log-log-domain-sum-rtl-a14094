// llsp_pkg -- constants and types shared by the log-log domain SPA decoder.
//
// A decoder message is one LLR held as {sign, magnitude}. The sign bit is 1
// for a negative LLR (so it equals the hard decision). The magnitude is the
// natural log of |LLR| plus a constant offset b, stored as an unsigned
// fixed-point number with INT_W integer and FRAC_W fraction bits. The offset
// removes the sign of the log value, so FP(1,3,6) means 1 + 3 + 6 = 10 bits
// per message and covers |LLR| in [e^-b, e^(8-b)). The defaults (3 integer
// bits, 6 fraction bits, b = 5) are the main configuration of the design; the
// alternative R = 0.1 configuration uses 4 fraction bits.
package llsp_pkg;

  // Default message format FP(1, INT_W, FRAC_W) and offset b.
  parameter int INT_W  = 3;
  parameter int FRAC_W = 6;
  parameter int B_OFF  = 5;       // offset b in whole log units

  // Fraction bits of the constant coefficients inside g() (design choice).
  parameter int COEF_FRAC = 8;

  // Code-structure tables that are loaded through the configuration port.
  typedef enum logic [1:0] {
    CFG_CN_DEG  = 2'd0,   // degree of check node j              (addr = j)
    CFG_EDGE_VN = 2'd1,   // VN index of edge e, edges CN-ordered (addr = e)
    CFG_VN_DEG  = 2'd2,   // degree of variable node i           (addr = i)
    CFG_VN_EDGE = 2'd3    // edge index of VN-ordered slot s     (addr = s)
  } cfg_sel_e;

  // Decoder controller states.
  typedef enum logic [3:0] {
    ST_IDLE,
    ST_VN_HDR, ST_VN_ACC, ST_VN_WAIT, ST_VN_EXT, ST_VN_DONE,
    ST_CN_HDR, ST_CN_RD, ST_CN_WAIT, ST_CN_WR,
    ST_DECIDE, ST_DONE
  } dec_state_e;

endpackage
