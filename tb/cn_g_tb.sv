// cn_g_tb -- exhaustive test of the piecewise-linear check-node kernel.
//
// Every representable offset log-magnitude is applied. The reference is the
// four-segment formula evaluated in floating point on x - b; the unit must
// agree within 1.5 grid steps (thresholds, slopes and biases are rounded to
// the grid). A second check confirms the approximation stays within 0.08 of
// ln(tanh(exp(x)/2)) over the range where the exact value is above -8.
module cn_g_tb;
  import llsp_pkg::*;
  localparam int MW = INT_W + FRAC_W;
  localparam real SC = 2.0 ** FRAC_W;

  logic [MW-1:0]        x;
  logic signed [MW+1:0] g;
  int checks = 0, failures = 0;

  cn_g dut (.x_i(x), .g_o(g));

  function automatic real g_ref(real v);
    if (v <= -0.76)      return v - 0.694;
    else if (v <= 0.538) return 0.833 * v - 0.822;
    else if (v <= 1.414) return 0.389 * v - 0.583;
    else                 return 0.0;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2 ** MW; i++) begin
      real v, r, ex, got;
      x = MW'(i);
      #1;
      v   = real'(i) / SC - real'(B_OFF);
      r   = g_ref(v);
      got = real'(g) / SC;
      checks++;
      if (got - r > 1.5 / SC || r - got > 1.5 / SC) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d v=%f got=%f ref=%f", i, v, got, r);
      end
      ex = $ln((1.0 - $exp(-$exp(v))) / (1.0 + $exp(-$exp(v))));
      if (ex > -8.0) begin
        checks++;
        if (got - ex > 0.08 || ex - got > 0.08) begin
          failures++;
          if (failures < 10) $display("FAIL approx x=%0d got=%f exact=%f", i, got, ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
