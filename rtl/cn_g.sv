// cn_g -- piecewise-linear check-node kernel g(x - b).
//
// In the log-log domain a check node needs ln(tanh(exp(x)/2)) of every
// incoming log-magnitude x. This unit evaluates it with the four-segment
// approximation
//     g(x) = x - 0.694            for x <= -0.76
//          = 0.833 x - 0.822      for -0.76 < x <= 0.538
//          = 0.389 x - 0.583      for 0.538 < x <= 1.414
//          = 0                    for x > 1.414
// on x = xin - b, where xin is the stored (offset) log-magnitude. The
// segment thresholds, slopes and biases are the published constants; they
// are rounded here to the message grid (FRAC_W fraction bits), the two slopes
// to COEF_FRAC fraction bits, which is a choice of this design. Products are
// rounded to nearest. The output is a signed number on the message grid and
// is never positive.
//
// Interface: x_i (unsigned offset log-magnitude) -> g_o (signed).
// Timing: purely combinational.
module cn_g
  import llsp_pkg::*;
#(
  parameter int INTW = llsp_pkg::INT_W,
  parameter int FRW  = llsp_pkg::FRAC_W,
  parameter int BOFF = llsp_pkg::B_OFF,
  parameter int CFR  = llsp_pkg::COEF_FRAC,
  localparam int MW  = INTW + FRW,        // magnitude width
  localparam int GW  = MW + 2             // signed output width
) (
  input  logic [MW-1:0]        x_i,
  output logic signed [GW-1:0] g_o
);

  localparam real SC   = 2.0 ** FRW;
  localparam int  BC   = BOFF * (2 ** FRW);            // b on the grid
  localparam int  T1   = int'(-0.760 * SC);
  localparam int  T2   = int'( 0.538 * SC);
  localparam int  T3   = int'( 1.414 * SC);
  localparam int  C0   = int'( 0.694 * SC);
  localparam int  C1   = int'( 0.822 * SC);
  localparam int  C2   = int'( 0.583 * SC);
  localparam int  K1   = int'( 0.833 * (2.0 ** CFR));
  localparam int  K2   = int'( 0.389 * (2.0 ** CFR));
  localparam int  PW   = GW + CFR + 2;                 // product width

  logic signed [GW-1:0] xs;      // x - b
  logic signed [PW-1:0] p1, p2;  // slope products
  logic signed [GW-1:0] r;

  always_comb begin
    xs = GW'(signed'({1'b0, x_i})) - GW'(BC);
    p1 = (PW'(xs) * PW'(K1) + PW'(2 ** (CFR - 1))) >>> CFR;
    p2 = (PW'(xs) * PW'(K2) + PW'(2 ** (CFR - 1))) >>> CFR;
    if (xs <= GW'(T1))      r = xs - GW'(C0);
    else if (xs <= GW'(T2)) r = GW'(p1) - GW'(C1);
    else if (xs <= GW'(T3)) r = GW'(p2) - GW'(C2);
    else                    r = '0;
    g_o = (r > 0) ? '0 : r;
  end

endmodule
