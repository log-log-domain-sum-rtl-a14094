// vn_fpm_tb -- random test of the log-domain pairwise LLR adder.
//
// Random operand pairs (sign and offset log-magnitude) are added by the unit
// and, independently, in floating point as L_a + L_b with L = +-exp(x - b).
// The result magnitude must match ln|L_a + L_b| + b within one grid step
// (after the same saturation to the representable range) and the sign must
// match whenever the sum is not a near-cancellation. Both saturation flags
// must be seen at least once.
module vn_fpm_tb;
  import llsp_pkg::*;
  localparam int MW = INT_W + FRAC_W;
  localparam real SC = 2.0 ** FRAC_W;

  logic [MW:0] a, b, s;
  logic        hi, lo;
  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;

  vn_fpm dut (.a_i(a), .b_i(b), .s_o(s), .sat_hi_o(hi), .sat_lo_o(lo));

  function automatic real lin(logic [MW:0] m);
    real v;
    v = $exp(real'(m[MW-1:0]) / SC - real'(B_OFF));
    return m[MW] ? -v : v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40000; t++) begin
      real sum, code;
      int  ref_code;
      a = (MW+1)'($urandom);
      b = (t % 4 == 0) ? {~a[MW], a[MW-1:0] ^ MW'($urandom_range(3, 0))} : (MW+1)'($urandom);
      #1;
      sum = lin(a) + lin(b);
      if (sum == 0.0) code = -1.0e9;
      else code = $ln(sum < 0.0 ? -sum : sum) * SC + real'(B_OFF) * SC;
      if (code < 0.0) ref_code = 0;
      else if (code > real'(2 ** MW - 1)) ref_code = 2 ** MW - 1;
      else ref_code = int'(code);
      checks++;
      if (int'(s[MW-1:0]) - ref_code > 1 || ref_code - int'(s[MW-1:0]) > 1) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h s=%h ref=%0d", a, b, s, ref_code);
      end
      if (code > 2.0) begin
        checks++;
        if (s[MW] != (sum < 0.0)) begin
          failures++;
          if (failures < 10) $display("FAIL sign a=%h b=%h s=%h", a, b, s);
        end
      end
      n_hi += int'(hi);
      n_lo += int'(lo);
    end
    checks++;
    if (n_hi == 0 || n_lo == 0) failures++;
    $display("saturations: high=%0d low=%0d", n_hi, n_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
