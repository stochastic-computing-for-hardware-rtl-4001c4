// tb_data_controller: checks the row buses and activation buffers.
// Host writes fill the current buffer; in sequential mode every row must carry
// buffer word rd_idx, in parallel mode row r carries word r; capture_rows and
// column words land in the other buffer and become visible only after swap;
// with the stochastic input selected every row carries the same binarized word
// (pixels 0 and 255 give fixed bits).
module tb_data_controller;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e                       mode;
  logic                        src_ext, take, capture_rows, col_we, swap, hw_we;
  logic [4:0]                  rd_idx, col_idx, hw_addr, hr_addr;
  logic [WORD-1:0][PIX_W-1:0]  pix;
  word_t [ROWS-1:0]            row_data, row_act;
  word_t                       col_word, hw_data, hr_data;
  word_t                       m [ROWS];

  data_controller dut (.*);

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
    mode = MODE_SEQ; src_ext = 0; take = 0; capture_rows = 0; col_we = 0; swap = 0; hw_we = 0;
    rd_idx = 0; col_idx = 0; hw_addr = 0; hr_addr = 0; pix = '0; row_act = '0; col_word = 0; hw_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      hw_we = 1; hw_addr = 5'(r); hw_data = $urandom; m[r] = hw_data; @(negedge clk);
    end
    hw_we = 0;
    for (int r = 0; r < ROWS; r++) begin
      hr_addr = 5'(r); #1; check(hr_data == m[r], "host read back");
    end
    mode = MODE_SEQ;
    for (int k = 0; k < ROWS; k++) begin
      bit ok;
      rd_idx = 5'(k); #1;
      ok = 1;
      for (int r = 0; r < ROWS; r++) if (row_data[r] != m[k]) ok = 0;
      check(ok, $sformatf("sequential broadcast of word %0d", k));
    end
    mode = MODE_PAR; #1;
    for (int r = 0; r < ROWS; r++) check(row_data[r] == m[r], $sformatf("parallel row %0d", r));
    // capture into the other buffer
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) row_act[r] = $urandom;
    capture_rows = 1; @(negedge clk); capture_rows = 0;
    hr_addr = 5'd7; #1; check(hr_data == m[7], "capture does not touch the current buffer");
    swap = 1; @(negedge clk); swap = 0;
    for (int r = 0; r < ROWS; r++) begin
      hr_addr = 5'(r); #1; check(hr_data == row_act[r], $sformatf("captured row %0d after swap", r));
    end
    // column words into the other buffer (which holds m)
    col_we = 1; col_idx = 5'd3; col_word = 32'hA5A5_0F0F; @(negedge clk); col_we = 0;
    swap = 1; @(negedge clk); swap = 0;
    hr_addr = 5'd3; #1; check(hr_data == 32'hA5A5_0F0F, "column word stored");
    hr_addr = 5'd4; #1; check(hr_data == m[4], "other words kept");
    // stochastic input
    mode = MODE_SEQ; src_ext = 1;
    for (int i = 0; i < WORD; i++) pix[i] = (i % 2) ? 8'd255 : 8'd0;
    for (int k = 0; k < 20; k++) begin
      bit ok;
      take = 1; #1;
      ok = 1;
      for (int r = 0; r < ROWS; r++) if (row_data[r] != 32'hAAAA_AAAA) ok = 0;
      check(ok, "stochastic word broadcast to all rows");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
