// vn_fpm -- pairwise sum of two LLRs held in the log-log domain.
//
// Each operand is {sign, x} with x = ln|L| + b. The sum L_a + L_b is formed
// without leaving the log domain by the log-sum/difference-exp function
//     f+(x, y) = max(x, y) + ln(1 + exp(-|x - y|))   signs equal
//     f-(x, y) = max(x, y) + ln(1 - exp(-|x - y|))   signs differ
// Both correction terms come from lookup tables indexed by |x - y|. The
// tables are computed at elaboration from the formulas above (rounded to the
// message grid), one entry per representable difference. Because both inputs
// carry the same offset b, the result carries it too. The sign of the sum is
//     sign_a                        if sign_a == sign_b
//     sign of the larger magnitude  otherwise (sign_a when x_a >= x_b)
// Results are saturated to the message range: a sum above the largest
// magnitude clips to it (sat_hi_o), a difference that cancels below the
// smallest magnitude, including exact cancellation where ln(0) = -inf,
// clips to zero (sat_lo_o). The table method, the sign rule and the offset
// handling follow the published algorithm; table depth, rounding and
// saturation are choices of this design.
//
// Interface: a_i, b_i messages in, s_o message out, two saturation flags.
// Timing: purely combinational.
module vn_fpm
  import llsp_pkg::*;
#(
  parameter int INTW = llsp_pkg::INT_W,
  parameter int FRW  = llsp_pkg::FRAC_W,
  localparam int MW  = INTW + FRW,
  localparam int TW  = MW + 2,           // signed table entry width
  localparam int TD  = 2 ** MW           // table depth
) (
  input  logic [MW:0] a_i,               // {sign, magnitude}
  input  logic [MW:0] b_i,
  output logic [MW:0] s_o,
  output logic        sat_hi_o,
  output logic        sat_lo_o
);

  typedef logic signed [TW-1:0] tab_t [TD];

  // ln(1 + exp(-d)) on the grid, d = index / 2^FRW.
  function automatic tab_t mk_plus();
    tab_t r;
    for (int i = 0; i < TD; i++) begin
      real d;
      d    = real'(i) / (2.0 ** FRW);
      r[i] = TW'(int'($ln(1.0 + $exp(-d)) * (2.0 ** FRW)));
    end
    return r;
  endfunction

  // ln(1 - exp(-d)) on the grid; clipped at -2^MW, which always saturates
  // the result to zero (the entry for d = 0 stands for minus infinity).
  function automatic tab_t mk_minus();
    tab_t r;
    r[0] = -TW'(TD);
    for (int i = 1; i < TD; i++) begin
      real d;
      real v;
      d = real'(i) / (2.0 ** FRW);
      v = $ln(1.0 - $exp(-d)) * (2.0 ** FRW);
      if (v < -real'(TD)) v = -real'(TD);
      r[i] = TW'(int'(v));
    end
    return r;
  endfunction

  localparam tab_t LUT_P = mk_plus();
  localparam tab_t LUT_M = mk_minus();

  logic          sa, sb;
  logic [MW-1:0] xa, xb, mx, d;
  logic signed [TW-1:0] corr, sum;

  always_comb begin
    sa = a_i[MW];
    sb = b_i[MW];
    xa = a_i[MW-1:0];
    xb = b_i[MW-1:0];
    if (xa >= xb) begin
      mx = xa;
      d  = xa - xb;
    end else begin
      mx = xb;
      d  = xb - xa;
    end
    corr = (sa == sb) ? LUT_P[d] : LUT_M[d];
    sum  = TW'(signed'({1'b0, mx})) + corr;
    sat_hi_o = (sum > TW'(TD - 1));
    sat_lo_o = (sum < 0);
    s_o[MW]  = (sa == sb) ? sa : ((xa >= xb) ? sa : sb);
    if (sat_hi_o)      s_o[MW-1:0] = MW'(TD - 1);
    else if (sat_lo_o) s_o[MW-1:0] = '0;
    else               s_o[MW-1:0] = sum[MW-1:0];
  end

endmodule
