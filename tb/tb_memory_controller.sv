// tb_memory_controller: checks that each accepted program write raises
// exactly one enable (the addressed cell's weight or threshold enable, or the
// addressed column's threshold enable), that nothing is written and
// prog_ready is low while busy, and that the step address is base + index
// modulo 64.
module tb_memory_controller;
  import bnn_pkg::*;
  int checks = 0, failures = 0;

  logic                      prog_valid, prog_ready, busy;
  prog_t                     prog;
  logic [W_AW-1:0]           w_base, step_idx, p_addr, step_addr;
  logic [ROWS-1:0][COLS-1:0] cell_w_we, cell_mu_we;
  logic [COLS-1:0]           col_mu_we;
  word_t                     p_wdata;

  memory_controller dut (.*);

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
    for (int k = 0; k < 300; k++) begin
      int r, c, s;
      r = $urandom_range(0, ROWS - 1); c = $urandom_range(0, COLS - 1); s = $urandom_range(0, 2);
      busy = ($urandom_range(0, 4) == 0);
      prog_valid = 1'b1;
      prog.sel = prog_sel_e'(s); prog.row = 5'(r); prog.col = 5'(c);
      prog.addr = W_AW'($urandom); prog.data = $urandom;
      w_base = W_AW'($urandom); step_idx = W_AW'($urandom);
      #1;
      check(prog_ready == !busy, "prog_ready is the inverse of busy");
      check(step_addr == W_AW'(int'(w_base) + int'(step_idx)), "step address = base + index");
      check(p_addr == prog.addr && p_wdata == prog.data, "address and data forwarded");
      if (busy) begin
        check(cell_w_we == '0 && cell_mu_we == '0 && col_mu_we == '0, "no write while busy");
      end else begin
        check($countones(cell_w_we) == (s == 0) && (s != 0 || cell_w_we[r][c]), "weight enable decode");
        check($countones(cell_mu_we) == (s == 1) && (s != 1 || cell_mu_we[r][c]), "cell mu enable decode");
        check($countones(col_mu_we) == (s == 2) && (s != 2 || col_mu_we[c]), "column mu enable decode");
      end
      prog_valid = 1'b0;
      #1;
      check(cell_w_we == '0 && cell_mu_we == '0 && col_mu_we == '0, "no write without prog_valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
