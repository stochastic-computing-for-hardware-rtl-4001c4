// tb_xnor_popcount: checks that pc counts the positions where data and weight
// agree (XNOR = 1), i.e. the +1/-1 dot product in popcount form, on random
// words and the equal / complementary corners.
module tb_xnor_popcount;
  import bnn_pkg::*;
  int checks = 0, failures = 0;

  word_t           data, weight;
  logic [PC_W-1:0] pc;

  xnor_popcount dut (.data, .weight, .pc);

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
    for (int k = 0; k < 500; k++) begin
      int exp;
      data   = $urandom;
      weight = (k == 0) ? data : (k == 1) ? ~data : $urandom;
      exp = 0;
      for (int i = 0; i < 32; i++) if (data[i] == weight[i]) exp++;
      #1;
      check(int'(pc) == exp, $sformatf("d=%h w=%h got %0d exp %0d", data, weight, pc, exp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
