// seq_output_ctrl: gathers the column neurons' results in parallel mode.
//
// Every cycle in which the 32 columns deliver a result (col_valid), the 32
// sign bits form one activation word, neuron 32*g + c at bit c, where g counts
// the results since start. The word is handed to the data controller at once
// (word_we, word_idx = g), which closes the loop from the bottom of the array
// back to its input side. When argmax_en is set, the block also keeps the
// largest z - mu seen among neurons with index below n_out (ties go to the
// lower index); at finish it reports that neuron as result_class with
// result_valid for one cycle. This is the output stage of the network's last
// layer. start clears the group counter and the running maximum. The argmax
// placement here is this design's choice; the published text requires an argmax
// of the last layer without saying where it is computed.
module seq_output_ctrl
  import bnn_pkg::*;
(
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  logic                                col_valid,
  input  logic [COLS-1:0]                     col_act,
  input  logic signed [COLS-1:0][SCORE_W-1:0] col_score,
  input  logic                                argmax_en,
  input  logic [IDX_W:0]                      n_out,
  input  logic                                finish,
  output logic                                word_we,
  output logic [$clog2(ROWS)-1:0]             word_idx,
  output word_t                               word,
  output logic                                result_valid,
  output logic [IDX_W:0]                      result_class,
  output logic signed [SCORE_W-1:0]           result_score
);

  localparam int unsigned CW = $clog2(COLS);

  logic [W_AW-1:0]            grp;
  logic                       best_v;
  logic signed [SCORE_W-1:0]  best_s;
  logic [IDX_W:0]             best_i;

  // Best column of the current group.
  logic                       g_v;
  logic signed [SCORE_W-1:0]  g_s;
  logic [IDX_W:0]             g_i;

  always_comb begin
    logic [W_AW+CW-1:0] idx;
    g_v = 1'b0;
    g_s = '0;
    g_i = '0;
    for (int c = 0; c < COLS; c++) begin
      idx = {grp, CW'(c)};
      if ((W_AW+CW+1)'(idx) < (W_AW+CW+1)'(n_out) && (!g_v || $signed(col_score[c]) > g_s)) begin
        g_v = 1'b1;
        g_s = $signed(col_score[c]);
        g_i = (IDX_W+1)'(idx);
      end
    end
  end

  assign word_we  = col_valid;
  assign word_idx = grp[$clog2(ROWS)-1:0];
  assign word     = col_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp          <= '0;
      best_v       <= 1'b0;
      best_s       <= '0;
      best_i       <= '0;
      result_valid <= 1'b0;
      result_class <= '0;
      result_score <= '0;
    end else begin
      result_valid <= 1'b0;
      if (start) begin
        grp    <= '0;
        best_v <= 1'b0;
      end else if (col_valid) begin
        grp <= grp + 1'b1;
        if (argmax_en && g_v && (!best_v || g_s > best_s)) begin
          best_v <= 1'b1;
          best_s <= g_s;
          best_i <= g_i;
        end
      end
      if (finish && argmax_en) begin
        result_valid <= 1'b1;
        result_class <= best_i;
        result_score <= best_s;
      end
    end
  end

endmodule
