// msg_ram -- simple dual-port memory with one write and one read port.
//
// All storage of the decoder uses this memory: the channel messages, the
// edge messages (check-to-variable and variable-to-check messages share one
// word per edge and are overwritten in place), the hard decisions and the
// code-structure tables. It has one synchronous write port and one
// synchronous read port; the read data appear one clock after the address. A
// read of the address being written in the same cycle returns the old word.
// The contents are not reset. The organisation is a choice of this design;
// the source only says that messages are kept in memory.
//
// Timing: write on the rising edge when we_i is high; rd_o valid one cycle
// after ra_i.
module msg_ram #(
  parameter int W     = 10,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we_i,
  input  logic [AW-1:0] wa_i,
  input  logic [W-1:0]  wd_i,
  input  logic [AW-1:0] ra_i,
  output logic [W-1:0]  rd_o
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[wa_i] <= wd_i;
    rd_o <= mem[ra_i];
  end

endmodule
