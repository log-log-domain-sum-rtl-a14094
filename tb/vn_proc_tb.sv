// vn_proc_tb -- random test of the serial variable-node processor.
//
// Each trial loads a channel message, accumulates d_v random check messages
// (one per clock) and then reads the extrinsic output for every edge. The
// reference adds the LLRs in floating point (L = +-exp(x - b)). Checked:
//   * the a-posteriori magnitude within one grid step per addition, and its
//     sign (the hard decision), unless the sum is near zero or saturates;
//   * each extrinsic message total - own against the floating-point
//     extrinsic sum, where that sum is not much smaller than the total (the
//     subtraction is then well conditioned);
//   * in the initial pass (init_i) the extrinsic output equals the channel
//     message exactly.
module vn_proc_tb;
  import llsp_pkg::*;
  localparam int MW = INT_W + FRAC_W;
  localparam real SC = 2.0 ** FRAC_W;

  logic clk = 0, rst_n = 0, start = 0, acc_v = 0, init = 0;
  logic [MW:0] ch, acc, own, ext, total;
  logic hd, sat;
  int checks = 0, failures = 0, n_init = 0, n_ext = 0;

  vn_proc dut (.clk, .rst_n, .start_i(start), .ch_i(ch), .acc_valid_i(acc_v), .acc_i(acc),
               .init_i(init), .own_i(own), .ext_o(ext), .total_o(total), .hd_o(hd), .sat_o(sat));

  always #5 clk = ~clk;

  function automatic real lin(logic [MW:0] m);
    real v;
    v = $exp(real'(m[MW-1:0]) / SC - real'(B_OFF));
    return m[MW] ? -v : v;
  endfunction

  function automatic real ABS(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Error of one rounded addition: half a grid step relative to the result,
  // plus the smallest magnitude for a result that clips to it.
  localparam real REL   = 0.5 * (2.0 ** (-FRAC_W)) * 1.05;
  localparam real FLOOR = 1.05 * 2.718281828 ** (-B_OFF);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MW:0] m [32];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int  dv;
      real tot, bnd;
      dv = int'($urandom_range(24, 1));
      @(negedge clk);
      ch = (MW+1)'($urandom); ch[MW-1:0] = MW'($urandom_range(330, 0));
      start = 1; init = (t % 10 == 0);
      tot = lin(ch);
      bnd = 0.0;
      for (int k = 0; k < dv; k++) begin
        m[k] = (MW+1)'($urandom);
        m[k][MW-1:0] = MW'($urandom_range(330, 0));
        tot += lin(m[k]);
        bnd += REL * ABS(tot) + FLOOR;
      end
      if (!init) begin
        for (int k = 0; k < dv; k++) begin
          @(negedge clk);
          start = 0; acc_v = 1; acc = m[k];
        end
      end
      @(negedge clk);
      start = 0; acc_v = 0;
      if (init) begin
        for (int k = 0; k < dv; k++) begin
          own = m[k]; #1;
          checks++; n_init++;
          if (ext !== ch) failures++;
        end
        continue;
      end
      begin
        real lt, le;
        lt = lin(total);
        checks++;
        if (lt - tot > bnd || tot - lt > bnd || ((tot > bnd || -tot > bnd) && hd !== (tot < 0.0))) begin
          failures++;
          if (failures < 10) $display("FAIL total t=%0d dv=%0d total=%f ref=%f bound=%f", t, dv, lt, tot, bnd);
        end
        for (int k = 0; k < dv; k++) begin
          real e, eb;
          e  = tot - lin(m[k]);
          eb = bnd + REL * (real'(ABS(e)) + ABS(tot)) + FLOOR;
          own = m[k]; #1;
          le = lin(ext);
          checks++; n_ext++;
          if (le - e > eb || e - le > eb) begin
            failures++;
            if (failures < 10) $display("FAIL ext t=%0d k=%0d ext=%f ref=%f bound=%f", t, k, le, e, eb);
          end
        end
      end
    end
    checks++;
    if (n_init == 0 || n_ext == 0) failures++;
    $display("init checks=%0d extrinsic checks=%0d", n_init, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
