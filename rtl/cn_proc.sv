// cn_proc -- serial check-node processor of the log-log domain SPA.
//
// A check node j sends to each neighbour i the approximate update
//     Lc(i<-j) = x_m + sum_{l != i, m} g(x_l - b),
//     sign     = product of the signs of all inputs except i,
// where x are the offset log-magnitudes of the incoming messages and m is the
// input of smallest magnitude among those other than i. The node is
// processed in two passes. While the d_c inputs stream in (one per cycle,
// in_valid_i) the unit keeps them in a small buffer together with g() of
// each, tracks the smallest and second smallest magnitude and where the
// smallest sits, the running sum G of all g() values and the XOR of the
// signs. Afterwards any output k can be read combinationally:
//     k is not the minimum:  x_min1 + G - g(x_min1) - g(x_k)
//     k is the minimum:      x_min2 + G - g(x_min1) - g(x_min2)
// which is the formula above with the excluded terms subtracted from the
// total. Results below the smallest magnitude clip to zero (sat_lo_o).
// The unit also XORs the hard decisions of the node's variable nodes
// (in_hd_i), so parity_o is this node's row of the syndrome H x^T.
//
// The update formula and g() follow the published algorithm; the serial
// two-pass organisation, min1/min2 tracking and the total-minus-own form are
// choices of this design.
//
// Interface: start_i clears the node state (it may coincide with the first
// in_valid_i). Inputs are numbered 0.. in arrival order; out_idx_i selects
// the output. Timing: one input per cycle; an output is valid the cycle
// after the last input has been accepted and stays valid until start_i.
module cn_proc
  import llsp_pkg::*;
#(
  parameter int INTW   = llsp_pkg::INT_W,
  parameter int FRW    = llsp_pkg::FRAC_W,
  parameter int BOFF   = llsp_pkg::B_OFF,
  parameter int DC_MAX = 6,
  localparam int MW    = INTW + FRW,
  localparam int GW    = MW + 2,
  localparam int IW    = (DC_MAX > 1) ? $clog2(DC_MAX) : 1,
  localparam int SW    = GW + IW + 2        // width of the g() sums
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  input  logic          in_valid_i,
  input  logic [MW:0]   in_msg_i,           // {sign, offset log-magnitude}
  input  logic          in_hd_i,            // hard decision of that VN
  input  logic [IW-1:0] out_idx_i,
  output logic [MW:0]   out_msg_o,
  output logic          parity_o,
  output logic          sat_lo_o
);

  localparam logic [MW-1:0] XMAX = '1;

  logic [MW:0]          buf_q  [DC_MAX];
  logic signed [GW-1:0] gbuf_q [DC_MAX];
  logic [IW-1:0]        cnt_q, idx1_q;
  logic [MW-1:0]        min1_q, min2_q;
  logic signed [GW-1:0] gmin1_q, gmin2_q;
  logic signed [SW-1:0] gsum_q;
  logic                 sgn_q, par_q;

  logic signed [GW-1:0] g_in;

  cn_g #(.INTW(INTW), .FRW(FRW), .BOFF(BOFF)) u_g (
    .x_i (in_msg_i[MW-1:0]),
    .g_o (g_in)
  );

  // Next-state of the accumulators, starting from the cleared state on start_i.
  logic [IW-1:0]        cnt_b, idx1_b;
  logic [MW-1:0]        min1_b, min2_b;
  logic signed [GW-1:0] gmin1_b, gmin2_b;
  logic signed [SW-1:0] gsum_b;
  logic                 sgn_b, par_b;

  always_comb begin
    if (start_i) begin
      cnt_b = '0; idx1_b = '0; min1_b = XMAX; min2_b = XMAX;
      gmin1_b = '0; gmin2_b = '0; gsum_b = '0; sgn_b = 1'b0; par_b = 1'b0;
    end else begin
      cnt_b = cnt_q; idx1_b = idx1_q; min1_b = min1_q; min2_b = min2_q;
      gmin1_b = gmin1_q; gmin2_b = gmin2_q; gsum_b = gsum_q; sgn_b = sgn_q; par_b = par_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0; idx1_q <= '0; min1_q <= XMAX; min2_q <= XMAX;
      gmin1_q <= '0; gmin2_q <= '0; gsum_q <= '0; sgn_q <= 1'b0; par_q <= 1'b0;
    end else if (in_valid_i) begin
      cnt_q  <= cnt_b + 1'b1;
      gsum_q <= gsum_b + SW'(g_in);
      sgn_q  <= sgn_b ^ in_msg_i[MW];
      par_q  <= par_b ^ in_hd_i;
      if (in_msg_i[MW-1:0] < min1_b) begin
        min2_q <= min1_b;  gmin2_q <= gmin1_b;
        min1_q <= in_msg_i[MW-1:0]; gmin1_q <= g_in; idx1_q <= cnt_b;
      end else if (in_msg_i[MW-1:0] < min2_b) begin
        min1_q <= min1_b;  gmin1_q <= gmin1_b; idx1_q <= idx1_b;
        min2_q <= in_msg_i[MW-1:0]; gmin2_q <= g_in;
      end else begin
        min1_q <= min1_b;  gmin1_q <= gmin1_b; idx1_q <= idx1_b;
        min2_q <= min2_b;  gmin2_q <= gmin2_b;
      end
    end else if (start_i) begin
      cnt_q <= cnt_b; idx1_q <= idx1_b; min1_q <= min1_b; min2_q <= min2_b;
      gmin1_q <= gmin1_b; gmin2_q <= gmin2_b; gsum_q <= gsum_b; sgn_q <= sgn_b; par_q <= par_b;
    end
  end

  // Input buffer: message and its g() value, written at the arrival index.
  always_ff @(posedge clk) begin
    if (in_valid_i) begin
      buf_q[cnt_b]  <= in_msg_i;
      gbuf_q[cnt_b] <= g_in;
    end
  end

  // Output k.
  logic signed [SW-1:0] ext;
  always_comb begin
    if (out_idx_i == idx1_q)
      ext = SW'(signed'({1'b0, min2_q})) + gsum_q - SW'(gmin1_q) - SW'(gmin2_q);
    else
      ext = SW'(signed'({1'b0, min1_q})) + gsum_q - SW'(gmin1_q) - SW'(gbuf_q[out_idx_i]);
    sat_lo_o          = (ext < 0);
    out_msg_o[MW]     = sgn_q ^ buf_q[out_idx_i][MW];
    out_msg_o[MW-1:0] = sat_lo_o ? '0 : ext[MW-1:0];
    parity_o          = par_q;
  end

  // The buffer holds at most DC_MAX inputs per node.
  a_deg : assert property (@(posedge clk) disable iff (!rst_n)
                           (in_valid_i && !start_i) |-> (32'(cnt_q) < DC_MAX));

endmodule
