// ch_log -- channel LLR to log-log domain message.
//
// At the start of a decoding the decoder stores every channel LLR as its sign
// and its offset log-magnitude ln|L| + b. This unit does that conversion for
// one LLR given in two's-complement fixed point (LLR_W bits, LLR_FR of them
// fractional). The logarithm is computed as
//     ln|L| = ln2 * (p - LLR_FR) + ln(1 + m)
// where p is the position of the leading one of |L| and m the next MANT_W
// bits after it, read at the middle of their interval. Both terms come from
// small tables built at elaboration. The result is rounded to the message grid
// and saturated to [0, 2^(INT_W+FRAC_W) - 1]; an LLR of zero gives sign 0 and
// the smallest magnitude. The conversion itself is the published first step
// of the decoder; the input format, the leading-one method and the table
// sizes are choices of this design.
//
// Interface: llr_i (signed) -> msg_o {sign, offset log-magnitude}.
// Timing: purely combinational.
module ch_log
  import llsp_pkg::*;
#(
  parameter int INTW   = llsp_pkg::INT_W,
  parameter int FRW    = llsp_pkg::FRAC_W,
  parameter int BOFF   = llsp_pkg::B_OFF,
  parameter int LLR_W  = 16,
  parameter int LLR_FR = 10,
  localparam int MW     = INTW + FRW,
  localparam int MANT_W = FRW + 2,
  localparam int PW     = $clog2(LLR_W + 1)
) (
  input  logic signed [LLR_W-1:0] llr_i,
  output logic [MW:0]             msg_o
);

  localparam int  VW = MW + 8;                 // signed working width
  localparam real SC = 2.0 ** FRW;

  typedef logic signed [VW-1:0] ptab_t [LLR_W + 1];
  typedef logic signed [VW-1:0] mtab_t [2 ** MANT_W];

  function automatic ptab_t mk_ptab();
    ptab_t r;
    for (int p = 0; p <= LLR_W; p++)
      r[p] = VW'(int'(real'(p - LLR_FR) * $ln(2.0) * SC));
    return r;
  endfunction

  function automatic mtab_t mk_mtab();
    mtab_t r;
    for (int i = 0; i < 2 ** MANT_W; i++)
      r[i] = VW'(int'($ln(1.0 + (real'(i) + 0.5) / (2.0 ** MANT_W)) * SC));
    return r;
  endfunction

  localparam ptab_t PTAB = mk_ptab();
  localparam mtab_t MTAB = mk_mtab();

  logic [LLR_W:0]       mag;      // |L|, one bit wider for the most negative value
  logic [PW-1:0]        p;
  logic [LLR_W:0]       norm;
  logic [MANT_W-1:0]    m;
  logic signed [VW-1:0] v;

  always_comb begin
    mag = llr_i[LLR_W-1] ? (LLR_W+1)'(-(LLR_W+1)'(llr_i)) : (LLR_W+1)'(llr_i);
    p   = '0;
    for (int k = 0; k <= LLR_W; k++)
      if (mag[k]) p = PW'(k);
    norm = mag << (PW'(LLR_W) - p);
    m    = norm[LLR_W-1 -: MANT_W];
    v    = PTAB[p] + MTAB[m] + VW'(BOFF * (2 ** FRW));
    msg_o[MW] = llr_i[LLR_W-1];
    if (mag == '0 || v < 0)       msg_o[MW-1:0] = '0;
    else if (v > VW'(2 ** MW - 1)) msg_o[MW-1:0] = '1;
    else                           msg_o[MW-1:0] = v[MW-1:0];
  end

endmodule
