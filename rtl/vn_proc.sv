// vn_proc -- serial variable-node processor of the log-log domain SPA.
//
// A variable node i adds its channel LLR and all incoming check messages to
// form the a-posteriori LLR, takes the hard decision from its sign, and
// sends to every check node j the sum of everything except j's own message.
// All values stay in the log-log domain: each addition is one vn_fpm
// operation (log-sum/difference-exp with table correction and the sign rule).
// The unit works in two passes over the node's edges:
//   1. start_i loads the channel message; each acc_valid_i adds one check
//      message into the running total (one per cycle).
//   2. for each edge the controller presents that edge's own check message
//      on own_i and reads ext_o = total - own, formed by a second vn_fpm with
//      the sign of own inverted. With init_i high ext_o is the channel message
//      itself, which is the initialisation step of the decoder.
// hd_o is the hard decision, 1 for a negative a-posteriori LLR.
// The node equations follow the published algorithm; the two-pass serial
// form and the total-minus-own extrinsic computation are choices of this
// design. A total that saturates at the largest magnitude limits the
// accuracy of the extrinsic messages of that node.
//
// Interface and timing: start_i and acc_valid_i update the total on the
// rising edge; total_o, hd_o and ext_o are valid the cycle after the last
// accumulation. ext_o is combinational in own_i.
module vn_proc
  import llsp_pkg::*;
#(
  parameter int INTW = llsp_pkg::INT_W,
  parameter int FRW  = llsp_pkg::FRAC_W,
  localparam int MW  = INTW + FRW
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_i,
  input  logic [MW:0] ch_i,        // channel message, taken on start_i
  input  logic        acc_valid_i,
  input  logic [MW:0] acc_i,       // check message to add
  input  logic        init_i,      // initial pass: extrinsic = channel
  input  logic [MW:0] own_i,       // own check message of the queried edge
  output logic [MW:0] ext_o,
  output logic [MW:0] total_o,
  output logic        hd_o,
  output logic        sat_o        // an addition or subtraction saturated
);

  logic [MW:0] tot_q, ch_q;
  logic [MW:0] acc_sum, ext_sum, own_neg;
  logic        acc_hi, acc_lo, ext_hi, ext_lo;

  vn_fpm #(.INTW(INTW), .FRW(FRW)) u_acc (
    .a_i (tot_q), .b_i (acc_i), .s_o (acc_sum), .sat_hi_o (acc_hi), .sat_lo_o (acc_lo)
  );

  assign own_neg = {~own_i[MW], own_i[MW-1:0]};

  vn_fpm #(.INTW(INTW), .FRW(FRW)) u_ext (
    .a_i (tot_q), .b_i (own_neg), .s_o (ext_sum), .sat_hi_o (ext_hi), .sat_lo_o (ext_lo)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tot_q <= '0;
      ch_q  <= '0;
    end else if (start_i) begin
      tot_q <= ch_i;
      ch_q  <= ch_i;
    end else if (acc_valid_i) begin
      tot_q <= acc_sum;
    end
  end

  assign ext_o   = init_i ? ch_q : ext_sum;
  assign total_o = tot_q;
  assign hd_o    = tot_q[MW];
  assign sat_o   = (acc_valid_i && (acc_hi || acc_lo)) || (!init_i && (ext_hi || ext_lo));

endmodule
