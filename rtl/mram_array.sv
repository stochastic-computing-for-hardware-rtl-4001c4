// mram_array: one Spin Torque MRAM array of a cell, written as a memory array.
//
// The published design stores each cell's 2 kbit of binary weights, and its
// thresholds, in MRAM next to the logic. Here that memory is a synchronous
// single-port array: a write (we) takes priority over a read; a read (re)
// returns the word one clock later on rdata, which holds its value until the
// next read. Contents are not reset, as a non-volatile array keeps whatever was
// programmed. The single port and the one-cycle read latency are this design's
// choices; the real part would be a process macro with the same function.
module mram_array #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic             re,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)      mem[addr] <= wdata;
    else if (re) rdata     <= mem[addr];
  end

endmodule
