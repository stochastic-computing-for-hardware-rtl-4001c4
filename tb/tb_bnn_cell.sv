// tb_bnn_cell: runs one cell as a sequential neuron.
// Programs 16 random weight words and 4 thresholds, then for several random
// layers (word count, presentation count T, threshold entry) streams random
// data words, one step per cycle with idle gaps, and checks: pc one cycle
// after each step equals the XNOR popcount of that step, the accumulator
// equals the running sum (restarted by step_first), and after eval the
// activation equals (sum >= mu) two cycles later.
module tb_bnn_cell;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              w_we, mu_we, step, acc_en, step_first, eval;
  logic [W_AW-1:0]   p_addr, step_addr;
  word_t             p_wdata, data;
  logic [MU_AW-1:0]  mu_addr;
  logic [PC_W-1:0]   pc;
  logic [ACC_W-1:0]  acc;
  logic              act;

  word_t             wmodel [16];
  int                mumodel [MU_DEPTH];

  bnn_cell dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {w_we, mu_we, step, acc_en, step_first, eval} = '0;
    p_addr = '0; step_addr = '0; p_wdata = '0; data = '0; mu_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 16; a++) begin
      w_we = 1'b1; p_addr = W_AW'(a); p_wdata = $urandom; wmodel[a] = p_wdata;
      @(negedge clk);
    end
    w_we = 1'b0;
    for (int a = 0; a < MU_DEPTH; a++) begin
      mu_we = 1'b1; p_addr = W_AW'(a);
      mumodel[a] = (a == 0) ? 0 : (a == 1) ? 8192 : $urandom_range(0, 700);
      p_wdata = word_t'(mumodel[a]);
      @(negedge clk);
    end
    mu_we = 1'b0;

    for (int layer = 0; layer < 12; layer++) begin
      int nw, tp, sum, exp_pc, mi;
      nw = $urandom_range(1, 16);
      tp = $urandom_range(1, T_MAX);
      mi = layer % MU_DEPTH;
      sum = 0;
      for (int t = 0; t < tp; t++) begin
        for (int k = 0; k < nw; k++) begin
          step = 1'b1; acc_en = 1'b1; step_first = (t == 0 && k == 0);
          step_addr = W_AW'(k); data = $urandom;
          exp_pc = 0;
          for (int i = 0; i < WORD; i++) if (data[i] == wmodel[k][i]) exp_pc++;
          @(negedge clk);
          step = 1'b0; acc_en = 1'b0; step_first = 1'b0;
          check(int'(pc) == exp_pc, $sformatf("pc got %0d exp %0d", pc, exp_pc));
          sum += exp_pc;
          if ($urandom_range(0, 3) == 0) @(negedge clk);   // idle gap
        end
      end
      @(negedge clk);
      check(int'(acc) == sum, $sformatf("layer %0d acc got %0d exp %0d", layer, acc, sum));
      eval = 1'b1; mu_addr = MU_AW'(mi);
      @(negedge clk);
      eval = 1'b0;
      @(negedge clk);
      check(act == (sum >= mumodel[mi]),
            $sformatf("layer %0d act got %0b for sum %0d mu %0d", layer, act, sum, mumodel[mi]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
