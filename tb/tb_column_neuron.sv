// tb_column_neuron: programs random column thresholds for 64 addresses, then
// presents random cell popcounts (0..32 each) with a step at a random
// address, and checks that two cycles after the step valid is high, score is
// sum - mu and act is (sum >= mu). Includes the all-32 and all-0 corners.
module tb_column_neuron;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                       mu_we, step, valid, act;
  logic [W_AW-1:0]            p_addr, step_addr;
  word_t                      p_wdata;
  logic [ROWS-1:0][PC_W-1:0]  pc_in;
  logic signed [SCORE_W-1:0]  score;
  int                         mum [W_DEPTH];

  column_neuron dut (.*);

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
    mu_we = 0; step = 0; p_addr = 0; step_addr = 0; p_wdata = 0; pc_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < W_DEPTH; a++) begin
      mu_we = 1; p_addr = W_AW'(a); mum[a] = $urandom_range(300, 700); p_wdata = word_t'(mum[a]);
      @(negedge clk);
    end
    mu_we = 0;
    for (int k = 0; k < 200; k++) begin
      int sum, a;
      a = $urandom_range(0, W_DEPTH - 1);
      sum = 0;
      for (int r = 0; r < ROWS; r++) begin
        pc_in[r] = (k == 0) ? 6'd32 : (k == 1) ? 6'd0 : 6'($urandom_range(0, 32));
        sum += int'(pc_in[r]);
      end
      step = 1; step_addr = W_AW'(a);
      @(negedge clk);
      step = 0;
      check(!valid, "valid not yet high one cycle after the step");
      @(negedge clk);
      check(valid, "valid two cycles after the step");
      check(int'(score) == sum - mum[a], $sformatf("score got %0d exp %0d", score, sum - mum[a]));
      check(act == (sum >= mum[a]), "act is the sign of sum - mu");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
