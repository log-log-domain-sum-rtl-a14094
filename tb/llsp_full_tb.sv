// llsp_full_tb -- one complete decoding at the decoder's default size.
//
// The decoder is instantiated with all parameters at their defaults, which
// hold the rate-0.01 code of the main configuration: the rate-0.01
// protograph lifted by 9984 gives N = 998400 variable nodes, M = 988416
// check nodes and 4063488 edges. The testbench builds that code with random
// circulant shifts, loads it, sends one all-zero codeword through a binary
// AWGN channel (sigma^2 = 0.5), decodes with at most 5 iterations and checks
// success_o against an independent syndrome of the read-back hard decisions,
// that the decision is the all-zero word, the iteration count and the exact
// cycle count of the decoding.
module llsp_full_tb;
  import llsp_pkg::*;
  import ldpc_code_pkg::*;

  localparam int NM = 998400, MM = 988416;
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

  llsp_decoder dut (
    .clk, .rst_n, .cfg_we_i(cfg_we), .cfg_sel_i(cfg_sel), .cfg_addr_i(cfg_addr),
    .cfg_data_i(cfg_data), .llr_we_i(llr_we), .llr_addr_i(llr_addr), .llr_i(llr),
    .num_vn_i(num_vn), .num_cn_i(num_cn), .max_iter_i(max_iter), .start_i(start),
    .busy_o(busy), .done_o(done), .success_o(success), .iter_o(iter),
    .hd_ra_i(hd_ra), .hd_rd_o(hd_rd));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    // watchdog: well above the 2.3e8 cycles of 5 iterations plus loading
    repeat (400_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ldpc_code c;

  initial begin
    bit hd[];
    bit syn;
    int first, ones;
    longint t0, exp_cyc, sv, sc;
    real sigma2;
    sigma2 = 0.5;
    c = new();
    c.build(PROTO_R001, 9984);
    $display("code N=%0d M=%0d E=%0d", c.n, c.m, c.e);
    checks++;
    if (c.n != NM || c.m != MM || c.e != 4063488) failures++;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1;
    foreach (c.cn_deg[j])  begin cfg_sel = CFG_CN_DEG;  cfg_addr = j; cfg_data = c.cn_deg[j];  @(negedge clk); end
    foreach (c.edge_vn[k]) begin cfg_sel = CFG_EDGE_VN; cfg_addr = k; cfg_data = c.edge_vn[k]; @(negedge clk); end
    foreach (c.vn_deg[i])  begin cfg_sel = CFG_VN_DEG;  cfg_addr = i; cfg_data = c.vn_deg[i];  @(negedge clk); end
    foreach (c.vn_edge[s]) begin cfg_sel = CFG_VN_EDGE; cfg_addr = s; cfg_data = c.vn_edge[s]; @(negedge clk); end
    cfg_we = 0;
    num_vn = NCW'(c.n); num_cn = MCW'(c.m);
    llr_we = 1;
    for (int i = 0; i < c.n; i++) begin
      real l;
      l = 2.0 * (1.0 + $sqrt(sigma2) * gauss()) / sigma2;
      if (l > 31.9) l = 31.9;
      if (l < -31.9) l = -31.9;
      llr_addr = NAW'(i); llr = 16'(int'(l * 1024.0));
      @(negedge clk);
    end
    llr_we = 0;
    max_iter = 8'd5;
    start = 1;
    @(posedge clk);
    t0 = cycles;
    #1 start = 0;
    @(posedge clk iff done);
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
    ones = 0;
    foreach (hd[i]) ones += int'(hd[i]);
    checks++;
    if (success !== !syn) failures++;
    checks++;
    if (!success || ones != 0 || iter > 8'd5) failures++;
    $display("full-size frame: success=%0d iterations=%0d decode cycles=%0d ones=%0d",
             success, iter, cycles - t0, ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
