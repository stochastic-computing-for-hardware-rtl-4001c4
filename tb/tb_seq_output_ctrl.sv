// tb_seq_output_ctrl: feeds random column results for several groups and
// checks that each result is passed on at once as activation word g, and that
// at finish the reported class and score are the argmax of z - mu over the
// neurons below n_out (ties to the lower index), for several n_out values.
module tb_seq_output_ctrl;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                                start, col_valid, argmax_en, finish;
  logic [COLS-1:0]                     col_act;
  logic signed [COLS-1:0][SCORE_W-1:0] col_score;
  logic [IDX_W:0]                      n_out, result_class;
  logic                                word_we, result_valid;
  logic [4:0]                          word_idx;
  word_t                               word;
  logic signed [SCORE_W-1:0]           result_score;

  seq_output_ctrl dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; col_valid = 0; argmax_en = 0; finish = 0; col_act = 0; col_score = '0; n_out = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int ng, best, best_i;
      ng = $urandom_range(1, 4);
      n_out = (run == 0) ? 11'd10 : 11'($urandom_range(1, ng * 32));
      argmax_en = 1;
      start = 1; @(negedge clk); start = 0;
      best = -100000; best_i = -1;
      for (int g = 0; g < ng; g++) begin
        col_valid = 1;
        col_act = $urandom;
        for (int c = 0; c < COLS; c++) begin
          int s;
          s = $urandom_range(0, 40) - 20;   // many ties
          col_score[c] = SCORE_W'(s);
          if (g * 32 + c < int'(n_out) && s > best) begin best = s; best_i = g * 32 + c; end
        end
        #1;
        check(word_we && word_idx == 5'(g) && word == col_act, $sformatf("word %0d passed on", g));
        @(negedge clk);
        col_valid = 0;
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      finish = 1; @(negedge clk); finish = 0;
      check(result_valid, "result_valid after finish");
      check(int'(result_class) == best_i && int'(result_score) == best,
            $sformatf("argmax got %0d/%0d exp %0d/%0d", result_class, result_score, best_i, best));
      @(negedge clk);
      check(!result_valid, "result_valid is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
