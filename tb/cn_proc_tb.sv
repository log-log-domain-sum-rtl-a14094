// cn_proc_tb -- random test of the serial check-node processor.
//
// Each trial streams d_c random messages (degree 1..DC_MAX, one per clock)
// with random hard decisions, then reads every output in the cycle right
// after the last input. Reference, in floating point, for output i:
//     x_m + sum_{l != i, m} g(x_l - b), m = smallest input other than i,
// clipped below at zero, with g the published four-segment formula, and
// sign = XOR of the other inputs' signs. Magnitudes must agree within the
// rounding of the g terms; sign and parity must be exact. Some trials start
// with the first input in the same cycle as start_i; some use small inputs
// so that the lower clip is exercised.
module cn_proc_tb;
  import llsp_pkg::*;
  localparam int MW = INT_W + FRAC_W;
  localparam int DC = 6;
  localparam real SC = 2.0 ** FRAC_W;

  logic clk = 0, rst_n = 0, start = 0, vin = 0, hd = 0;
  logic [MW:0] msg, out;
  logic [2:0]  idx;
  logic        par, sat;
  int checks = 0, failures = 0, n_sat = 0, n_together = 0;

  cn_proc #(.DC_MAX(DC)) dut (.clk, .rst_n, .start_i(start), .in_valid_i(vin), .in_msg_i(msg),
                              .in_hd_i(hd), .out_idx_i(idx), .out_msg_o(out), .parity_o(par),
                              .sat_lo_o(sat));

  always #5 clk = ~clk;

  function automatic real g_ref(real v);
    if (v <= -0.76)      return v - 0.694;
    else if (v <= 0.538) return 0.833 * v - 0.822;
    else if (v <= 1.414) return 0.389 * v - 0.583;
    else                 return 0.0;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MW:0] m [DC];
    logic        h [DC];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int  dc;
      bit  together, ph;
      dc = int'($urandom_range(DC, 1));
      together = ($urandom_range(1, 0) == 1);
      ph = 1'b0;
      for (int k = 0; k < dc; k++) begin
        m[k] = (MW+1)'($urandom);
        if (t % 3 == 0) m[k][MW-1:0] = MW'($urandom_range(200, 0));
        h[k] = 1'($urandom);
        ph ^= h[k];
      end
      @(negedge clk);
      start = 1;
      if (together) begin
        vin = 1; msg = m[0]; hd = h[0]; n_together++;
      end
      for (int k = together ? 1 : 0; k < dc; k++) begin
        @(negedge clk);
        start = 0; vin = 1; msg = m[k]; hd = h[k];
      end
      @(negedge clk);
      start = 0; vin = 0;
      checks++;
      if (par !== ph) begin
        failures++;
        if (failures < 10) $display("FAIL parity t=%0d", t);
      end
      for (int i = 0; i < dc; i++) begin
        int  mi;
        real r;
        bit  s;
        int  rc;
        mi = -1; s = 1'b0;
        for (int k = 0; k < dc; k++)
          if (k != i) begin
            s ^= m[k][MW];
            if (mi < 0 || m[k][MW-1:0] < m[mi][MW-1:0]) mi = k;
          end
        if (mi < 0) continue;   // degree 1: no extrinsic output
        r = real'(m[mi][MW-1:0]);
        for (int k = 0; k < dc; k++)
          if (k != i && k != mi) r += g_ref(real'(m[k][MW-1:0]) / SC - real'(B_OFF)) * SC;
        rc = (r < 0.0) ? 0 : int'(r);
        idx = 3'(i);
        #1;
        n_sat += int'(sat);
        checks++;
        if (out[MW] !== s || int'(out[MW-1:0]) - rc > dc || rc - int'(out[MW-1:0]) > dc) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d i=%0d dc=%0d out=%h ref=%0d sign=%0d", t, i, dc, out, rc, s);
        end
      end
    end
    checks++;
    if (n_sat == 0 || n_together == 0) failures++;
    $display("lower clips=%0d start-with-data=%0d", n_sat, n_together);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
