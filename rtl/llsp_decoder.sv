// llsp_decoder -- log-log domain sum-product LDPC decoder (top level).
//
// The decoder corrects a block of N channel LLRs against an LDPC code whose
// structure is loaded at run time. Every message it stores is an LLR in the
// log-log domain: a sign bit and ln|L| + b on an unsigned FP(INT_W, FRAC_W)
// grid, 10 bits per message with the defaults, instead of the wider
// fixed-point LLRs a conventional SPA decoder keeps.
//
// Flooding schedule, processed one node at a time:
//   init   VN pass with init set: every edge gets the channel message; the
//          hard decisions are the channel signs.
//   CN pass  every check node reads its edge messages (cn_proc), checks the
//          parity of its VNs' hard decisions and writes back its outputs.
//          If no check failed the block is a codeword: done, success.
//          If max_iter_i rounds are complete: done, failure.
//   VN pass  every variable node accumulates channel + check messages
//          (vn_proc), stores the hard decision and writes back its
//          extrinsic messages. Then the next CN pass.
// One round (CN pass + VN pass) is one decoding iteration; iter_o counts
// them. The stopping test on each CN pass uses the hard decisions of the
// preceding VN pass, so the decoder stops as soon as H x^T = 0.
//
// Memories (msg_ram): channel messages (N), edge messages (E, one word per
// edge, overwritten by whichever pass runs), hard decisions (N), and four
// code tables: CN degree (M), VN index of each edge in check-node order (E),
// VN degree (N), and for each VN, in VN order, the indices of its edges (E).
// The host writes the tables through cfg_*; sel picks the table (cfg_sel_e).
// Channel LLRs arrive on llr_* in fixed point and are converted by ch_log on
// the way into memory. Hard decisions are read back on hd_ra_i / hd_rd_o
// (one-cycle latency) while the decoder is idle.
//
// The default sizes hold the rate-0.01 code of the design's main
// configuration: N = 998400 variable nodes, M = 988416 check nodes and
// E = 4063488 edges (a 100 x 99 protograph with 407 edges lifted by 9984),
// check degree up to 6, variable degree up to 281.
//
// The node equations, the message format, the offset and the stopping rule
// follow the published algorithm. The serial architecture, the memory and
// table organisation, the host interface and the iteration count are choices
// of this design.
//
// Timing: a VN of degree dv takes 2 * dv + 9 cycles (dv + 6 in the initial
// pass), a CN of degree dc takes 2 * dc + 5 cycles, and each CN pass ends
// with one decision cycle. With S_v = sum of VN degrees (= E), S_c = sum of
// CN degrees (= E), the time from the clock edge that takes start_i to the
// edge at which done_o is seen high is
//     (S_v + 6N) + (2 S_c + 5M + 1) + iter * ((2 S_v + 9N) + (2 S_c + 5M + 1)) + 1.
// cfg and llr writes are accepted only while busy_o is low. start_i is taken
// when idle; done_o pulses for one cycle at the end, when success_o and
// iter_o are valid.
module llsp_decoder
  import llsp_pkg::*;
#(
  parameter int N_MAX  = 998400,
  parameter int M_MAX  = 988416,
  parameter int E_MAX  = 4063488,
  parameter int DC_MAX = 6,
  parameter int DV_MAX = 281,
  parameter int INTW   = llsp_pkg::INT_W,
  parameter int FRW    = llsp_pkg::FRAC_W,
  parameter int BOFF   = llsp_pkg::B_OFF,
  parameter int LLR_W  = 16,
  parameter int LLR_FR = 10,
  parameter int IT_W   = 8,
  localparam int MW    = INTW + FRW,
  localparam int NAW   = $clog2(N_MAX),
  localparam int MAW   = $clog2(M_MAX),
  localparam int EAW   = $clog2(E_MAX),
  localparam int NCW   = $clog2(N_MAX + 1),
  localparam int MCW   = $clog2(M_MAX + 1),
  localparam int CDW   = $clog2(DC_MAX + 1),
  localparam int VDW   = $clog2(DV_MAX + 1),
  localparam int CIW   = (DC_MAX > 1) ? $clog2(DC_MAX) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // code structure
  input  logic                    cfg_we_i,
  input  cfg_sel_e                cfg_sel_i,
  input  logic [31:0]             cfg_addr_i,
  input  logic [31:0]             cfg_data_i,
  // channel LLRs
  input  logic                    llr_we_i,
  input  logic [NAW-1:0]          llr_addr_i,
  input  logic signed [LLR_W-1:0] llr_i,
  // decoding
  input  logic [NCW-1:0]          num_vn_i,
  input  logic [MCW-1:0]          num_cn_i,
  input  logic [IT_W-1:0]         max_iter_i,
  input  logic                    start_i,
  output logic                    busy_o,
  output logic                    done_o,
  output logic                    success_o,
  output logic [IT_W-1:0]         iter_o,
  // hard-decision read-back
  input  logic [NAW-1:0]          hd_ra_i,
  output logic                    hd_rd_o
);

  dec_state_e st_q;

  // ------------------------------------------------------------ controller state
  logic [NCW-1:0]  node_q;        // current VN or CN index
  logic [EAW:0]    base_q;        // first edge / slot of the current node
  logic [VDW-1:0]  deg_q;         // degree of the current node
  logic [VDW-1:0]  k_q;           // issue counter within the node
  logic            v1_q, v2_q;    // read pipeline valids
  logic [EAW-1:0]  ea1_q;         // edge address travelling with the pipeline
  logic [MW:0]     msg1_q;        // edge message delayed to meet the hd read
  logic            init_q, fail_q;
  logic [IT_W-1:0] iter_q;


  // ---------------------------------------------------------------- memories
  logic           ch_we;  logic [NAW-1:0] ch_ra;  logic [MW:0] ch_wd, ch_rd;
  logic           ed_we;  logic [EAW-1:0] ed_wa, ed_ra; logic [MW:0] ed_wd, ed_rd;
  logic           hd_we;  logic [NAW-1:0] hd_wa, hd_ra; logic hd_wd, hd_rd;
  logic [MAW-1:0] cdeg_ra;  logic [CDW-1:0] cdeg_rd;
  logic [EAW-1:0] evn_ra;   logic [NAW-1:0] evn_rd;
  logic [NAW-1:0] vdeg_ra;  logic [VDW-1:0] vdeg_rd;
  logic [EAW-1:0] vedge_ra; logic [EAW-1:0] vedge_rd;

  logic idle;
  assign idle = (st_q == ST_IDLE) || (st_q == ST_DONE);

  ch_log #(.INTW(INTW), .FRW(FRW), .BOFF(BOFF), .LLR_W(LLR_W), .LLR_FR(LLR_FR)) u_chlog (
    .llr_i (llr_i), .msg_o (ch_wd)
  );
  assign ch_we = llr_we_i && idle;

  msg_ram #(.W(MW + 1), .DEPTH(N_MAX)) u_ch_ram (
    .clk, .we_i (ch_we), .wa_i (llr_addr_i), .wd_i (ch_wd), .ra_i (ch_ra), .rd_o (ch_rd));
  msg_ram #(.W(MW + 1), .DEPTH(E_MAX)) u_edge_ram (
    .clk, .we_i (ed_we), .wa_i (ed_wa), .wd_i (ed_wd), .ra_i (ed_ra), .rd_o (ed_rd));
  msg_ram #(.W(1), .DEPTH(N_MAX)) u_hd_ram (
    .clk, .we_i (hd_we), .wa_i (hd_wa), .wd_i (hd_wd), .ra_i (hd_ra), .rd_o (hd_rd));

  logic cfg_ok;
  assign cfg_ok = cfg_we_i && idle;

  msg_ram #(.W(CDW), .DEPTH(M_MAX)) u_cdeg_ram (
    .clk, .we_i (cfg_ok && cfg_sel_i == CFG_CN_DEG), .wa_i (cfg_addr_i[MAW-1:0]),
    .wd_i (cfg_data_i[CDW-1:0]), .ra_i (cdeg_ra), .rd_o (cdeg_rd));
  msg_ram #(.W(NAW), .DEPTH(E_MAX)) u_evn_ram (
    .clk, .we_i (cfg_ok && cfg_sel_i == CFG_EDGE_VN), .wa_i (cfg_addr_i[EAW-1:0]),
    .wd_i (cfg_data_i[NAW-1:0]), .ra_i (evn_ra), .rd_o (evn_rd));
  msg_ram #(.W(VDW), .DEPTH(N_MAX)) u_vdeg_ram (
    .clk, .we_i (cfg_ok && cfg_sel_i == CFG_VN_DEG), .wa_i (cfg_addr_i[NAW-1:0]),
    .wd_i (cfg_data_i[VDW-1:0]), .ra_i (vdeg_ra), .rd_o (vdeg_rd));
  msg_ram #(.W(EAW), .DEPTH(E_MAX)) u_vedge_ram (
    .clk, .we_i (cfg_ok && cfg_sel_i == CFG_VN_EDGE), .wa_i (cfg_addr_i[EAW-1:0]),
    .wd_i (cfg_data_i[EAW-1:0]), .ra_i (vedge_ra), .rd_o (vedge_rd));

  // ------------------------------------------------------------ node units
  logic          cn_start, cn_in_valid, cn_par, cn_sat;
  logic [MW:0]   cn_in_msg, cn_out_msg;
  logic [CIW-1:0] cn_out_idx;

  cn_proc #(.INTW(INTW), .FRW(FRW), .BOFF(BOFF), .DC_MAX(DC_MAX)) u_cn (
    .clk, .rst_n, .start_i (cn_start), .in_valid_i (cn_in_valid), .in_msg_i (cn_in_msg),
    .in_hd_i (hd_rd), .out_idx_i (cn_out_idx), .out_msg_o (cn_out_msg),
    .parity_o (cn_par), .sat_lo_o (cn_sat));

  logic        vn_start, vn_acc_valid, vn_hd, vn_sat;
  logic [MW:0] vn_ext, vn_total;

  vn_proc #(.INTW(INTW), .FRW(FRW)) u_vn (
    .clk, .rst_n, .start_i (vn_start), .ch_i (ch_rd), .acc_valid_i (vn_acc_valid),
    .acc_i (ed_rd), .init_i (init_q), .own_i (ed_rd), .ext_o (vn_ext), .total_o (vn_total),
    .hd_o (vn_hd), .sat_o (vn_sat));

  // ------------------------------------------------------------ controller
  logic issuing;
  assign issuing = (k_q < deg_q);

  // Memory address and write steering.
  always_comb begin
    ch_ra    = node_q[NAW-1:0];
    vdeg_ra  = node_q[NAW-1:0];
    cdeg_ra  = node_q[MAW-1:0];
    vedge_ra = EAW'(base_q + (EAW+1)'(k_q));
    evn_ra   = EAW'(base_q + (EAW+1)'(k_q));
    hd_ra    = idle ? hd_ra_i : evn_rd;
    ed_ra    = (st_q == ST_CN_RD) ? EAW'(base_q + (EAW+1)'(k_q)) : vedge_rd;
    ed_we    = 1'b0;
    ed_wa    = ea1_q;
    ed_wd    = vn_ext;
    hd_we    = 1'b0;
    hd_wa    = node_q[NAW-1:0];
    hd_wd    = vn_hd;
    if (st_q == ST_VN_EXT && v2_q) begin
      ed_we = 1'b1;
    end
    if (st_q == ST_VN_DONE) hd_we = 1'b1;
    if (st_q == ST_CN_WR) begin
      ed_we = 1'b1;
      ed_wa = EAW'(base_q + (EAW+1)'(k_q));
      ed_wd = cn_out_msg;
    end
  end

  assign cn_out_idx   = CIW'(k_q);
  assign cn_in_msg    = msg1_q;
  assign cn_in_valid  = (st_q == ST_CN_RD || st_q == ST_CN_WAIT) && v2_q;
  assign cn_start     = (st_q == ST_CN_HDR) && v1_q;
  assign vn_start     = (st_q == ST_VN_HDR) && v1_q;
  assign vn_acc_valid = (st_q == ST_VN_ACC || st_q == ST_VN_WAIT) && v2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= ST_IDLE;
      node_q <= '0; base_q <= '0; deg_q <= '0; k_q <= '0;
      v1_q <= 1'b0; v2_q <= 1'b0; ea1_q <= '0; msg1_q <= '0;
      init_q <= 1'b0; fail_q <= 1'b0; iter_q <= '0;
      done_o <= 1'b0; success_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      // read pipeline: stage 1 = table data, stage 2 = message / hd data
      v2_q   <= v1_q;
      msg1_q <= ed_rd;
      unique case (st_q)
        ST_IDLE, ST_DONE: begin
          v1_q <= 1'b0;
          if (start_i) begin
            st_q <= ST_VN_HDR; node_q <= '0; base_q <= '0; k_q <= '0;
            init_q <= 1'b1; iter_q <= '0; success_o <= 1'b0;
          end
        end
        // ---- VN pass
        ST_VN_HDR: begin
          // first cycle reads vdeg / ch, second cycle starts the node
          if (!v1_q) v1_q <= 1'b1;
          else begin
            v1_q <= 1'b0; v2_q <= 1'b0;
            deg_q <= vdeg_rd; k_q <= '0;
            st_q <= init_q ? ST_VN_EXT : ST_VN_ACC;
          end
        end
        ST_VN_ACC: begin
          v1_q <= issuing;
          if (issuing) k_q <= k_q + 1'b1;
          else st_q <= ST_VN_WAIT;
        end
        ST_VN_WAIT: begin
          v1_q <= 1'b0;
          if (!v1_q && !v2_q) begin
            st_q <= ST_VN_EXT; k_q <= '0;
          end
        end
        ST_VN_EXT: begin
          v1_q  <= issuing;
          ea1_q <= vedge_rd;
          if (issuing) k_q <= k_q + 1'b1;
          else if (!v1_q && !v2_q) st_q <= ST_VN_DONE;
        end
        ST_VN_DONE: begin
          base_q <= base_q + (EAW+1)'(deg_q);
          k_q    <= '0;
          if (node_q + 1'b1 == num_vn_i) begin
            node_q <= '0; base_q <= '0; fail_q <= 1'b0;
            st_q   <= ST_CN_HDR;
          end else begin
            node_q <= node_q + 1'b1;
            st_q   <= ST_VN_HDR;
          end
        end
        // ---- CN pass
        ST_CN_HDR: begin
          if (!v1_q) v1_q <= 1'b1;
          else begin
            v1_q <= 1'b0; v2_q <= 1'b0;
            deg_q <= VDW'(cdeg_rd); k_q <= '0;
            st_q <= ST_CN_RD;
          end
        end
        ST_CN_RD: begin
          v1_q <= issuing;
          if (issuing) k_q <= k_q + 1'b1;
          else st_q <= ST_CN_WAIT;
        end
        ST_CN_WAIT: begin
          v1_q <= 1'b0;
          if (!v1_q && !v2_q) begin
            st_q <= ST_CN_WR; k_q <= '0;
          end
        end
        ST_CN_WR: begin
          if (k_q + 1'b1 < deg_q) k_q <= k_q + 1'b1;
          else begin
            fail_q <= fail_q | cn_par;
            base_q <= base_q + (EAW+1)'(deg_q);
            k_q    <= '0;
            if (MCW'(node_q) + 1'b1 == num_cn_i) st_q <= ST_DECIDE;
            else begin
              node_q <= node_q + 1'b1;
              st_q   <= ST_CN_HDR;
            end
          end
        end
        ST_DECIDE: begin
          node_q <= '0; base_q <= '0; k_q <= '0;
          if (!fail_q || iter_q == max_iter_i) begin
            success_o <= !fail_q;
            done_o    <= 1'b1;
            st_q      <= ST_DONE;
          end else begin
            iter_q <= iter_q + 1'b1;
            init_q <= 1'b0;
            st_q   <= ST_VN_HDR;
          end
        end
        default: st_q <= ST_IDLE;
      endcase
    end
  end

  assign busy_o  = !idle;
  assign iter_o  = iter_q;
  assign hd_rd_o = hd_rd;

  a_cfg_idle : assert property (@(posedge clk) disable iff (!rst_n) cfg_we_i |-> idle);
  a_llr_idle : assert property (@(posedge clk) disable iff (!rst_n) llr_we_i |-> idle);
  a_cn_deg   : assert property (@(posedge clk) disable iff (!rst_n)
                                (st_q == ST_CN_RD) |-> (32'(deg_q) <= DC_MAX));

endmodule
