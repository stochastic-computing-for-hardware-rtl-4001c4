// bnn_pkg: constants and types shared by the stochastic-computing BNN array.
//
// The array is 32 x 32 identical cells. Each cell holds a 2 kbit weight memory
// read as 32-bit words, 32 XNOR gates and a 32-bit popcount, and a sequential
// part (accumulator register, threshold memory, subtractor, sign bit). These
// sizes are the published ones. The threshold memory depth, the accumulator
// width (sized for 1024 inputs times up to 8 stochastic presentations), the
// column threshold memory and the command/program formats are this design's
// own choices.
package bnn_pkg;

  // Array geometry (published: 32x32 cells, 32-bit words, 2 kbit per cell).
  localparam int unsigned ROWS      = 32;
  localparam int unsigned COLS      = 32;
  localparam int unsigned WORD      = 32;
  localparam int unsigned CELL_BITS = 2048;
  localparam int unsigned W_DEPTH   = CELL_BITS / WORD;   // 64 words
  localparam int unsigned W_AW      = $clog2(W_DEPTH);    // 6

  // Popcount of one 32-bit word: 0..32 needs 6 bits.
  localparam int unsigned PC_W      = $clog2(WORD + 1);   // 6

  // Stochastic presentations: the published area figures assume T = 8.
  localparam int unsigned T_MAX     = 8;
  localparam int unsigned T_W       = $clog2(T_MAX);      // 3, holds T-1

  // Cell accumulator: up to 1024 inputs x T_MAX presentations = 8192.
  localparam int unsigned MAX_IN    = ROWS * WORD;        // 1024
  localparam int unsigned ACC_W     = $clog2(MAX_IN * T_MAX + 1); // 14

  // Cell threshold memory: one entry per layer mapped in sequential mode.
  localparam int unsigned MU_DEPTH  = 4;
  localparam int unsigned MU_AW     = $clog2(MU_DEPTH);

  // Column popcount tree: 32 cells x 0..32 = 0..1024.
  localparam int unsigned CSUM_W    = $clog2(MAX_IN + 1); // 11
  localparam int unsigned SCORE_W   = CSUM_W + 1;         // signed z - mu

  // Grayscale input pixels.
  localparam int unsigned PIX_W     = 8;

  // Output index range for argmax (up to 1024 neurons).
  localparam int unsigned IDX_W     = $clog2(MAX_IN);     // 10

  typedef logic [WORD-1:0] word_t;

  // Sequential: every cell is a neuron, the same word is broadcast to all rows.
  // Parallel: every column is a neuron, row r receives input word r.
  typedef enum logic {MODE_SEQ = 1'b0, MODE_PAR = 1'b1} mode_e;

  typedef enum logic [1:0] {
    PROG_WEIGHT  = 2'd0,   // cell weight word
    PROG_CELL_MU = 2'd1,   // cell threshold
    PROG_COL_MU  = 2'd2    // column threshold
  } prog_sel_e;

  // One layer of inference.
  typedef struct packed {
    mode_e             mode;
    logic              src_ext;     // seq mode: take words from the stochastic input
    logic [W_AW-1:0]   w_base;      // first weight address of this layer
    logic [W_AW-1:0]   n_steps_m1;  // seq: input words - 1, par: neuron groups - 1
    logic [T_W-1:0]    n_pres_m1;   // seq: stochastic presentations T - 1
    logic [MU_AW-1:0]  mu_addr;     // seq: cell threshold entry
    logic              argmax;      // par: report the argmax of z - mu
    logic [IDX_W:0]    n_out;       // par: neurons taking part in the argmax
  } layer_cmd_t;

  // One write into a cell or column memory.
  typedef struct packed {
    prog_sel_e                 sel;
    logic [$clog2(ROWS)-1:0]   row;
    logic [$clog2(COLS)-1:0]   col;
    logic [W_AW-1:0]           addr;
    word_t                     data;
  } prog_t;

endpackage
