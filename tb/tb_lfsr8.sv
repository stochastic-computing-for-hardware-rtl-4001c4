// tb_lfsr8: checks that the generator starts at its seed, never reaches zero,
// visits all 255 non-zero values exactly once per period of 255 steps, and
// holds its value while en is low.
module tb_lfsr8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [7:0] q;
  always #5 clk = ~clk;

  lfsr8 #(.SEED(8'h5A)) dut (.clk, .rst_n, .en, .q);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen [256];
    int first_repeat;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(q == 8'h5A, "reset value is the seed");
    en = 1'b0;
    repeat (3) @(negedge clk);
    check(q == 8'h5A, "holds while en is low");
    en = 1'b1;
    first_repeat = -1;
    for (int k = 0; k < 255; k++) begin
      check(q != 8'h00, "never zero");
      if (seen[q] && first_repeat < 0) first_repeat = k;
      seen[q] = 1'b1;
      @(negedge clk);
    end
    check(first_repeat < 0, $sformatf("no value repeats within 255 steps (repeat at %0d)", first_repeat));
    check(q == 8'h5A, "period is 255");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
