// llsp_r01_tb -- the rate-0.1 workload at its full block length.
//
// The decoder is built for the rate-0.1 configuration: the rate-0.1
// protograph lifted by 12800 (N = 128000, M = 115200, 473600 edges) and the
// 4-fraction-bit message format FP(1,3,4) with offset b = 5. One all-zero
// codeword is sent over a binary-input AWGN channel and decoded, then a
// pure-noise frame is run into the iteration limit. The checks are those of
// the small end-to-end test: success against an independent syndrome of the
// read-back hard decisions, the decoded word, the iteration count and the
// exact cycle count.
module llsp_r01_tb;
  import llsp_pkg::*;
  import ldpc_code_pkg::*;

  localparam int NM = 128000, MM = 115200, EM = 473600;
  localparam int FR = 4;
  localparam int NAW = $clog2(NM), NCW = $clog2(NM + 1), MCW = $clog2(MM + 1);

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, llr_we = 0, start = 0;
  cfg_sel_e cfg_sel = CFG_CN_DEG;
  logic [31:0] cfg_addr = '0, cfg_data = '0;
  logic [NAW-1:0] llr_addr = '0, hd_ra = '0;
  logic signed [15:0] llr = '0;
  logic [NCW-1:0] num_vn = '0;
  logic [MCW-1:0] num_cn = '0;
  logic [7:0] max_iter = '0, iter;
  logic busy, done, success, hd_rd;

  llsp_decoder #(.N_MAX(NM), .M_MAX(MM), .E_MAX(EM), .FRW(FR)) dut (
    .clk, .rst_n, .cfg_we_i(cfg_we), .cfg_sel_i(cfg_sel), .cfg_addr_i(cfg_addr),
    .cfg_data_i(cfg_data), .llr_we_i(llr_we), .llr_addr_i(llr_addr), .llr_i(llr),
    .num_vn_i(num_vn), .num_cn_i(num_cn), .max_iter_i(max_iter), .start_i(start),
    .busy_o(busy), .done_o(done), .success_o(success), .iter_o(iter),
    .hd_ra_i(hd_ra), .hd_rd_o(hd_rd));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stop0 = 0, n_stop_iter = 0, n_limit = 0, n_clip_ch = 0, n_clip_cn = 0, n_sat_vn = 0, n_load = 0;
  longint cycles = 0;
  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (dut.st_q == ST_CN_WR && dut.cn_sat) n_clip_cn++;
    if (dut.vn_sat && (dut.vn_acc_valid || (dut.st_q == ST_VN_EXT && dut.v2_q && !dut.init_q))) n_sat_vn++;
    if (llr_we && dut.ch_wd[MW_C-1:0] == '1) n_clip_ch++;
  end
  localparam int MW_C = INT_W + FR;

  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ldpc_code code;

  task automatic load(ldpc_code c);
    @(negedge clk);
    cfg_we = 1;
    foreach (c.cn_deg[j])  begin cfg_sel = CFG_CN_DEG;  cfg_addr = j; cfg_data = c.cn_deg[j];  @(negedge clk); end
    foreach (c.edge_vn[k]) begin cfg_sel = CFG_EDGE_VN; cfg_addr = k; cfg_data = c.edge_vn[k]; @(negedge clk); end
    foreach (c.vn_deg[i])  begin cfg_sel = CFG_VN_DEG;  cfg_addr = i; cfg_data = c.vn_deg[i];  @(negedge clk); end
    foreach (c.vn_edge[s]) begin cfg_sel = CFG_VN_EDGE; cfg_addr = s; cfg_data = c.vn_edge[s]; @(negedge clk); end
    cfg_we = 0;
    num_vn = NCW'(c.n); num_cn = MCW'(c.m);
    n_load++;
  endtask

  // sigma2 < 0 selects a noiseless frame, sigma2 = 0 pure noise.
  task automatic frame(ldpc_code c, real sigma2, int maxit);
    bit hd[];
    bit syn;
    int first;
    longint t0, exp_cyc, sv, sc;
    @(negedge clk);
    llr_we = 1;
    for (int i = 0; i < c.n; i++) begin
      real l;
      if (sigma2 < 0.0) l = 30.0;
      else if (sigma2 == 0.0) l = 4.0 * gauss();
      else l = 2.0 * (1.0 + $sqrt(sigma2) * gauss()) / sigma2;
      if (l > 31.9) l = 31.9;
      if (l < -31.9) l = -31.9;
      llr_addr = NAW'(i); llr = 16'(int'(l * 1024.0));
      @(negedge clk);
    end
    llr_we = 0;
    max_iter = 8'(maxit);
    start = 1;
    @(posedge clk);
    t0 = cycles;
    #1 start = 0;
    @(posedge clk iff done);
    // expected duration
    sv = 0; sc = 0;
    foreach (c.vn_deg[i]) sv += longint'(c.vn_deg[i]);
    foreach (c.cn_deg[j]) sc += longint'(c.cn_deg[j]);
    exp_cyc = (sv + 6 * c.n) + (2 * sc + 5 * c.m + 1) +
              longint'(iter) * ((2 * sv + 9 * c.n) + (2 * sc + 5 * c.m + 1)) + 1;
    checks++;
    if (cycles - t0 != exp_cyc) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cycles - t0, exp_cyc);
    end
    // read back hard decisions
    hd = new[c.n];
    @(negedge clk);
    for (int i = 0; i <= c.n; i++) begin
      if (i < c.n) hd_ra = NAW'(i);
      @(negedge clk);
      if (i > 0) hd[i - 1] = hd_rd;
    end
    syn = 1'b0; first = 0;
    foreach (c.cn_deg[j]) begin
      syn |= c.check(first, c.cn_deg[j], hd);
      first += c.cn_deg[j];
    end
    checks++;
    if (success !== !syn) begin
      failures++;
      $display("FAIL success=%0d but syndrome=%0d", success, syn);
    end
    checks++;
    if (iter > 8'(maxit) || (!success && iter != 8'(maxit))) begin
      failures++;
      $display("FAIL iter=%0d max=%0d success=%0d", iter, maxit, success);
    end
    if (success) begin
      int ones = 0;
      foreach (hd[i]) ones += int'(hd[i]);
      checks++;
      if (sigma2 != 0.0 && ones != 0) begin
        failures++;
        $display("FAIL decoded word has %0d ones", ones);
      end
      if (iter == 0) n_stop0++; else n_stop_iter++;
    end else n_limit++;
    $display("frame N=%0d sigma2=%f success=%0d iterations=%0d cycles=%0d", c.n, sigma2, success, iter, cycles - t0);
  endtask

  initial begin
    code = new();
    repeat (3) @(posedge clk);
    rst_n = 1;
    code.build(PROTO_R01, 12800);
    load(code);
    frame(code, 0.8, 20);
    frame(code, 0.0, 1);
    $display("stop0=%0d stop_after_iter=%0d limit=%0d ch_clip=%0d cn_clip=%0d vn_sat=%0d loads=%0d",
             n_stop0, n_stop_iter, n_limit, n_clip_ch, n_clip_cn, n_sat_vn, n_load);
    checks++; if (n_stop_iter == 0) failures++;
    checks++; if (n_limit == 0)     failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
