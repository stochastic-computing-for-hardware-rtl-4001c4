// memory_controller: the single access point to all cell and column memories.
//
// Programming: a host write (prog_valid with a prog_t record) is decoded into
// the write enable of exactly one memory: the weight word or the threshold of
// cell (row, col), or a column threshold. The write happens at the clock edge
// of the cycle in which prog_valid and prog_ready are both high; prog_ready is
// low while a layer runs, because programming shares the memories' ports.
// Compute: the read address of every weight memory and column threshold
// memory is the layer's base address plus the sequencer's step index, the same
// address for all cells (modulo 64). This block only decodes and adds; it adds
// no latency. Its exact duties are this design's choice: the published figure
// names the controller without describing it.
module memory_controller
  import bnn_pkg::*;
(
  input  logic                              prog_valid,
  output logic                              prog_ready,
  input  prog_t                             prog,
  input  logic                              busy,
  input  logic [W_AW-1:0]                   w_base,
  input  logic [W_AW-1:0]                   step_idx,
  output logic [ROWS-1:0][COLS-1:0]         cell_w_we,
  output logic [ROWS-1:0][COLS-1:0]         cell_mu_we,
  output logic [COLS-1:0]                   col_mu_we,
  output logic [W_AW-1:0]                   p_addr,
  output word_t                             p_wdata,
  output logic [W_AW-1:0]                   step_addr
);

  logic fire;
  assign prog_ready = ~busy;
  assign fire       = prog_valid & ~busy;
  assign p_addr     = prog.addr;
  assign p_wdata    = prog.data;
  assign step_addr  = w_base + step_idx;

  always_comb begin
    cell_w_we  = '0;
    cell_mu_we = '0;
    col_mu_we  = '0;
    if (fire) begin
      unique case (prog.sel)
        PROG_WEIGHT:  cell_w_we[prog.row][prog.col]  = 1'b1;
        PROG_CELL_MU: cell_mu_we[prog.row][prog.col] = 1'b1;
        PROG_COL_MU:  col_mu_we[prog.col]            = 1'b1;
        default: ;
      endcase
    end
  end

endmodule
