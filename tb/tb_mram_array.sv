// tb_mram_array: self-checking test of the cell memory array.
// Fills all 64 words of a 32-bit array with random data, reads them back in a
// shuffled order and checks the one-cycle read latency, that rdata holds
// between reads, that a write has priority over a simultaneous read, and a
// narrow 4-entry array as used for thresholds.
module tb_mram_array;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        we, re, we4, re4;
  logic [5:0]  addr;
  logic [1:0]  addr4;
  logic [31:0] wdata, rdata;
  logic [13:0] wdata4, rdata4;
  logic [31:0] model [64];
  logic [13:0] model4 [4];

  mram_array #(.DEPTH(64), .WIDTH(32)) dut (.clk, .we, .re, .addr, .wdata, .rdata);
  mram_array #(.DEPTH(4), .WIDTH(14)) dut4 (.clk, .we(we4), .re(re4), .addr(addr4), .wdata(wdata4), .rdata(rdata4));

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
    we = 0; re = 0; addr = 0; wdata = 0; we4 = 0; re4 = 0; addr4 = 0; wdata4 = 0;
    @(negedge clk);
    for (int a = 0; a < 64; a++) begin
      we = 1; addr = 6'(a); wdata = $urandom; model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < 64; k++) begin
      int a;
      a = (k * 37 + 11) % 64;
      re = 1; addr = 6'(a);
      @(negedge clk);
      re = 0;
      check(rdata == model[a], $sformatf("read addr %0d got %h exp %h", a, rdata, model[a]));
      addr = 6'(a ^ 1);
      @(negedge clk);
      check(rdata == model[a], "rdata must hold without a read");
    end
    // write has priority: a read in the same cycle does not update rdata
    re = 1; addr = 6'd3; @(negedge clk);
    we = 1; re = 1; addr = 6'd5; wdata = ~model[5]; model[5] = wdata; @(negedge clk);
    check(rdata == model[3], "write and read together: write wins, rdata unchanged");
    we = 0; re = 1; addr = 6'd5; @(negedge clk); re = 0;
    check(rdata == model[5], "rewritten word reads back");
    for (int a = 0; a < 4; a++) begin
      we4 = 1; addr4 = 2'(a); wdata4 = 14'($urandom); model4[a] = wdata4; @(negedge clk);
    end
    we4 = 0;
    for (int a = 3; a >= 0; a--) begin
      re4 = 1; addr4 = 2'(a); @(negedge clk); re4 = 0;
      check(rdata4 == model4[a], $sformatf("threshold array addr %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
