// data_controller: feeds the row data line buses and keeps layer activations.
//
// Sits on the left edge of the array. Each of the 32 rows has a data line bus
// shared by the 32 cells of the row; here it is split into a 32-bit word going
// into the row (row_data) and the 32 sign bits coming out of it (row_act).
//   Sequential mode: the same word is broadcast to every row. It is either the
//   next stochastic binary word made from the external pixels (src_ext) or word
//   rd_idx of the current activation buffer.
//   Parallel mode: row r receives word r of the current activation buffer.
// Activations live in two 32-word buffers. A layer reads the current one and
// writes the other: capture_rows stores row r's sign bits as word r (neuron
// 32*r + c at bit c), col_we stores a word from the sequential output
// controller. swap, given at the end of a layer, makes the written buffer the
// current one. The host may read and write the current buffer (hr_*, hw_*).
// All row outputs are combinational from the buffers and pixels; buffer
// writes take effect at the clock edge. The double buffer and the split bus
// are this design's choices.
module data_controller
  import bnn_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  mode_e                        mode,
  input  logic                         src_ext,
  input  logic [$clog2(ROWS)-1:0]      rd_idx,
  // external pixels, binarized on the fly
  input  logic [WORD-1:0][PIX_W-1:0]   pix,
  input  logic                         take,
  // row buses
  output word_t [ROWS-1:0]             row_data,
  input  word_t [ROWS-1:0]             row_act,
  input  logic                         capture_rows,
  // words from the sequential output controller
  input  logic                         col_we,
  input  logic [$clog2(ROWS)-1:0]      col_idx,
  input  word_t                        col_word,
  input  logic                         swap,
  // host access to the current buffer
  input  logic                         hw_we,
  input  logic [$clog2(ROWS)-1:0]      hw_addr,
  input  word_t                        hw_data,
  input  logic [$clog2(ROWS)-1:0]      hr_addr,
  output word_t                        hr_data
);

  word_t buf_q [2][ROWS];
  logic  cur;
  word_t stoch;

  stoch_binarizer u_bin (
    .clk   (clk),
    .rst_n (rst_n),
    .take  (take),
    .pix   (pix),
    .bits  (stoch)
  );

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      if (mode == MODE_PAR) row_data[r] = buf_q[cur][r];
      else if (src_ext)     row_data[r] = stoch;
      else                  row_data[r] = buf_q[cur][rd_idx];
    end
  end

  assign hr_data = buf_q[cur][hr_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur <= 1'b0;
    else if (swap) cur <= ~cur;
  end

  always_ff @(posedge clk) begin
    if (capture_rows) begin
      for (int r = 0; r < ROWS; r++) buf_q[~cur][r] <= row_act[r];
    end
    if (col_we) buf_q[~cur][col_idx] <= col_word;
    if (hw_we)  buf_q[cur][hw_addr]  <= hw_data;
  end

endmodule
