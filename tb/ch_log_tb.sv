// ch_log_tb -- test of the channel LLR to log-log domain conversion.
//
// Random 16-bit fixed-point LLRs (10 fraction bits) over the whole range,
// biased towards small magnitudes, plus zero and the extreme values. The
// reference is round(ln(|L|) * 2^FRAC_W) + b * 2^FRAC_W, clipped to the
// message range; the unit must agree within one grid step and give the sign
// of L. An LLR of zero must give the smallest magnitude.
module ch_log_tb;
  import llsp_pkg::*;
  localparam int MW = INT_W + FRAC_W;
  localparam real SC = 2.0 ** FRAC_W;

  logic signed [15:0] llr;
  logic [MW:0]        msg;
  int checks = 0, failures = 0;

  ch_log dut (.llr_i(llr), .msg_o(msg));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(logic signed [15:0] v);
    real mag, code;
    int  ref_code;
    llr = v;
    #1;
    mag = (v < 0) ? -real'(v) : real'(v);
    if (mag == 0.0) ref_code = 0;
    else begin
      code = $ln(mag / 1024.0) * SC + real'(B_OFF) * SC;
      if (code < 0.0) ref_code = 0;
      else if (code > real'(2 ** MW - 1)) ref_code = 2 ** MW - 1;
      else ref_code = int'(code);
    end
    checks++;
    if (int'(msg[MW-1:0]) - ref_code > 1 || ref_code - int'(msg[MW-1:0]) > 1 ||
        (v != 0 && msg[MW] != (v < 0))) begin
      failures++;
      if (failures < 10) $display("FAIL llr=%0d msg=%h ref=%0d", v, msg, ref_code);
    end
  endtask

  initial begin
    one(16'sd0); one(16'sd1); one(-16'sd1); one(16'sd32767); one(-16'sd32768);
    for (int t = 0; t < 20000; t++) begin
      int sh;
      sh = int'($urandom_range(15, 0));
      one(16'($signed($urandom) >>> sh));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
