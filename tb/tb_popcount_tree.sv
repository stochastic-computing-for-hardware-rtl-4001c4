// tb_popcount_tree: checks the adder tree in both of its uses: a 32 x 1-bit
// popcount and the 32 x 6-bit column tree, against a plain loop sum, on
// random vectors and on the all-zero and all-maximum corners.
module tb_popcount_tree;
  int checks = 0, failures = 0;

  logic [31:0]       in1;
  logic [5:0]        sum1;
  logic [31:0][5:0]  in6;
  logic [10:0]       sum6;

  popcount_tree #(.N_IN(32), .IN_W(1), .OUT_W(6))  dut1 (.in(in1), .sum(sum1));
  popcount_tree #(.N_IN(32), .IN_W(6), .OUT_W(11)) dut6 (.in(in6), .sum(sum6));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 400; k++) begin
      int exp1, exp6;
      in1 = (k == 0) ? '0 : (k == 1) ? '1 : $urandom;
      exp1 = 0;
      for (int i = 0; i < 32; i++) exp1 += in1[i];
      exp6 = 0;
      for (int i = 0; i < 32; i++) begin
        in6[i] = (k == 0) ? 6'd0 : (k == 1) ? 6'd32 : 6'($urandom_range(0, 32));
        exp6 += int'(in6[i]);
      end
      #1;
      check(int'(sum1) == exp1, $sformatf("popcount %h: got %0d exp %0d", in1, sum1, exp1));
      check(int'(sum6) == exp6, $sformatf("column sum got %0d exp %0d", sum6, exp6));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
