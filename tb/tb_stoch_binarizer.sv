// tb_stoch_binarizer: each lane's generator visits every value 1..255 once
// per 255 steps, so over exactly 255 presentations a pixel of value p must
// give exactly p ones. The test checks that count for random pixels on all
// 32 lanes, plus pixels 0 and 255 (always 0 / always 1) in every cycle, and
// that the bits only change when take is high.
module tb_stoch_binarizer;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, take = 1'b0;
  logic [WORD-1:0][PIX_W-1:0] pix;
  word_t bits;
  always #5 clk = ~clk;

  stoch_binarizer dut (.clk, .rst_n, .take, .pix, .bits);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones [WORD];
    word_t held;
    for (int i = 0; i < WORD; i++) pix[i] = 8'($urandom_range(0, 255));
    pix[0] = 8'd0;
    pix[1] = 8'd255;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    held = bits;
    repeat (4) @(negedge clk);
    check(bits == held, "bits hold while take is low");
    for (int i = 0; i < WORD; i++) ones[i] = 0;
    take = 1'b1;
    for (int k = 0; k < 255; k++) begin
      check(bits[0] == 1'b0 && bits[1] == 1'b1, "pixel 0 gives 0 and pixel 255 gives 1");
      for (int i = 0; i < WORD; i++) ones[i] += bits[i];
      @(negedge clk);
    end
    take = 1'b0;
    for (int i = 0; i < WORD; i++)
      check(ones[i] == int'(pix[i]), $sformatf("lane %0d: %0d ones for pixel %0d", i, ones[i], pix[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
