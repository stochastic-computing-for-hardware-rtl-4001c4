// bnn_top: in-memory binarized neural network with a stochastic first layer.
//
// A 32 x 32 array of identical cells, each holding 2 kbit of weights next to
// its XNOR/popcount logic, runs a fully connected BNN one layer per command.
// A grayscale input image is not fed as fixed-point numbers: it is presented
// T times as stochastic binary images (each pixel bit is 1 with probability
// equal to its gray level) and the first layer sums the popcounts of all T
// presentations before thresholding, so every layer, the first included, uses
// the same binary cells.
//
// Around the array:
//   memory_controller  programs weights/thresholds, broadcasts read addresses
//   data_controller    drives the 32 row buses, binarizes pixels, keeps the
//                      activations in a double buffer
//   column_neuron x32  column popcount tree + threshold (parallel mode)
//   seq_output_ctrl    packs column results into words, computes the argmax
//   layer_sequencer    schedules one layer per command
//
// Host interface (all synchronous to clk, active-low asynchronous reset):
//   prog_valid/prog_ready/prog   one memory write per accepted cycle, only
//                                while no layer runs
//   cmd_valid/cmd_ready/cmd      start one layer (layer_cmd_t)
//   in_valid/in_ready/in_pix     32 grayscale pixels per accepted cycle; one
//                                image of n words is sent T times in order
//   buf_we/buf_waddr/buf_wdata   write the current activation buffer
//   buf_raddr/buf_rdata          read the current activation buffer
//   done                         one cycle at the end of each layer
//   result_valid/class/score     argmax of a parallel layer run with argmax
// Layer latency: steps + 3 cycles (plus input stalls), see layer_sequencer.
// The cell, the two operating modes, the column popcount tree, the 2 kbit per
// cell and the 32 x 32 size follow the published architecture; the host
// interface, the buffers and the command set are this design's own.
module bnn_top
  import bnn_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         prog_valid,
  output logic                         prog_ready,
  input  prog_t                        prog,
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  layer_cmd_t                   cmd,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [WORD-1:0][PIX_W-1:0]   in_pix,
  input  logic                         buf_we,
  input  logic [$clog2(ROWS)-1:0]      buf_waddr,
  input  word_t                        buf_wdata,
  input  logic [$clog2(ROWS)-1:0]      buf_raddr,
  output word_t                        buf_rdata,
  output logic                         done,
  output logic                         result_valid,
  output logic [IDX_W:0]               result_class,
  output logic signed [SCORE_W-1:0]    result_score
);

  layer_cmd_t                 cur;
  logic                       busy, step, acc_en, step_first, col_step, eval;
  logic                       capture_rows, out_start, out_finish, swap, stall;
  logic [W_AW-1:0]            step_idx, step_addr, p_addr;
  word_t                      p_wdata;
  logic [ROWS-1:0][COLS-1:0]  cell_w_we, cell_mu_we;
  logic [COLS-1:0]            col_mu_we;

  word_t [ROWS-1:0]           row_data, row_act;
  logic [ROWS-1:0][COLS-1:0][PC_W-1:0] cell_pc;
  logic [COLS-1:0][ROWS-1:0][PC_W-1:0] col_pc;

  logic [COLS-1:0]                     col_valid, col_act;
  logic signed [COLS-1:0][SCORE_W-1:0] col_score;

  logic                       word_we;
  logic [$clog2(ROWS)-1:0]    word_idx;
  word_t                      word;

  layer_sequencer u_seq (
    .clk          (clk),
    .rst_n        (rst_n),
    .cmd_valid    (cmd_valid),
    .cmd_ready    (cmd_ready),
    .cmd          (cmd),
    .in_valid     (in_valid),
    .in_ready     (in_ready),
    .cur          (cur),
    .busy         (busy),
    .step         (step),
    .acc_en       (acc_en),
    .step_first   (step_first),
    .col_step     (col_step),
    .step_idx     (step_idx),
    .eval         (eval),
    .capture_rows (capture_rows),
    .out_start    (out_start),
    .out_finish   (out_finish),
    .swap         (swap),
    .stall        (stall),
    .done         (done)
  );

  memory_controller u_mem (
    .prog_valid (prog_valid),
    .prog_ready (prog_ready),
    .prog       (prog),
    .busy       (busy),
    .w_base     (cur.w_base),
    .step_idx   (step_idx),
    .cell_w_we  (cell_w_we),
    .cell_mu_we (cell_mu_we),
    .col_mu_we  (col_mu_we),
    .p_addr     (p_addr),
    .p_wdata    (p_wdata),
    .step_addr  (step_addr)
  );

  data_controller u_data (
    .clk          (clk),
    .rst_n        (rst_n),
    .mode         (cur.mode),
    .src_ext      (cur.src_ext),
    .rd_idx       (step_idx[$clog2(ROWS)-1:0]),
    .pix          (in_pix),
    .take         (in_ready),
    .row_data     (row_data),
    .row_act      (row_act),
    .capture_rows (capture_rows),
    .col_we       (word_we),
    .col_idx      (word_idx),
    .col_word     (word),
    .swap         (swap),
    .hw_we        (buf_we),
    .hw_addr      (buf_waddr),
    .hw_data      (buf_wdata),
    .hr_addr      (buf_raddr),
    .hr_data      (buf_rdata)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      bnn_cell u_cell (
        .clk        (clk),
        .rst_n      (rst_n),
        .w_we       (cell_w_we[r][c]),
        .mu_we      (cell_mu_we[r][c]),
        .p_addr     (p_addr),
        .p_wdata    (p_wdata),
        .step       (step),
        .acc_en     (acc_en),
        .step_first (step_first),
        .step_addr  (step_addr),
        .data       (row_data[r]),
        .eval       (eval),
        .mu_addr    (cur.mu_addr),
        .pc         (cell_pc[r][c]),
        .acc        (),
        .act        (row_act[r][c])
      );
      assign col_pc[c][r] = cell_pc[r][c];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_column
    column_neuron u_col (
      .clk       (clk),
      .rst_n     (rst_n),
      .mu_we     (col_mu_we[c]),
      .p_addr    (p_addr),
      .p_wdata   (p_wdata),
      .step      (col_step),
      .step_addr (step_addr),
      .pc_in     (col_pc[c]),
      .valid     (col_valid[c]),
      .score     (col_score[c]),
      .act       (col_act[c])
    );
  end

  seq_output_ctrl u_out (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (out_start),
    .col_valid    (col_valid[0]),
    .col_act      (col_act),
    .col_score    (col_score),
    .argmax_en    (cur.argmax),
    .n_out        (cur.n_out),
    .finish       (out_finish),
    .word_we      (word_we),
    .word_idx     (word_idx),
    .word         (word),
    .result_valid (result_valid),
    .result_class (result_class),
    .result_score (result_score)
  );

endmodule
