// msg_ram_tb -- test of the simple dual-port memory.
//
// Random writes and reads against a model array: read data must appear
// exactly one clock after the address, and a read of the word written in the
// same cycle must return the old contents.
module msg_ram_tb;
  localparam int W = 10, DEPTH = 64;
  logic clk = 0, we;
  logic [5:0] wa, ra;
  logic [W-1:0] wd, rd;
  logic [W-1:0] model [DEPTH];
  logic [W-1:0] expect_q;
  int checks = 0, failures = 0;

  msg_ram #(.W(W), .DEPTH(DEPTH)) dut (.clk, .we_i(we), .wa_i(wa), .wd_i(wd), .ra_i(ra), .rd_o(rd));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1; ra = 0;
    for (int i = 0; i < DEPTH; i++) begin
      wa = 6'(i); wd = W'($urandom); model[i] = wd;
      @(posedge clk); #1;
    end
    for (int t = 0; t < 2000; t++) begin
      we = $urandom_range(1, 0) == 1;
      wa = 6'($urandom); wd = W'($urandom);
      ra = (t % 5 == 0) ? wa : 6'($urandom);
      expect_q = model[ra];
      @(posedge clk);
      if (we) model[wa] = wd;
      #1;
      checks++;
      if (rd !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d ra=%0d rd=%h exp=%h", t, ra, rd, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
