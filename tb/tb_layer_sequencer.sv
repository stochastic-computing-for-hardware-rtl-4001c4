// tb_layer_sequencer: issues random sequential and parallel layer commands
// and checks the schedule: number of steps (words x T, or groups), step_first
// only on the first step, the word index sequence, stalls whenever the
// stochastic input is not valid, eval one cycle after the last sequential
// step, done exactly 3 cycles after the last step, capture_rows / out_finish
// according to the mode, and cmd_ready low while a layer runs.
module tb_layer_sequencer;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            cmd_valid, cmd_ready, in_valid, in_ready, busy, step, acc_en, step_first;
  logic            col_step, eval, capture_rows, out_start, out_finish, swap, stall, done;
  layer_cmd_t      cmd, cur;
  logic [W_AW-1:0] step_idx;

  layer_sequencer dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int stalls_seen;
    stalls_seen = 0;
    cmd_valid = 0; cmd = '0; in_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int nsteps, npres, exp_steps, steps, cyc, last_step_cyc, eval_cyc, done_cyc;
      bit par, ext, ok_idx, ok_first;
      par = (n % 3 == 2);
      ext = !par && (n % 2 == 0);
      nsteps = $urandom_range(1, 32);
      npres = par ? 1 : $urandom_range(1, T_MAX);
      cmd = '0;
      cmd.mode = par ? MODE_PAR : MODE_SEQ;
      cmd.src_ext = ext;
      cmd.n_steps_m1 = W_AW'(nsteps - 1);
      cmd.n_pres_m1 = T_W'(npres - 1);
      cmd.argmax = par;
      exp_steps = nsteps * npres;
      check(cmd_ready, "ready when idle");
      cmd_valid = 1;
      @(negedge clk);
      cmd_valid = 0;
      steps = 0; cyc = 0; last_step_cyc = -1; eval_cyc = -1; done_cyc = -1;
      ok_idx = 1; ok_first = 1;
      while (done_cyc < 0 && cyc < 2000) begin
        in_valid = !ext || ($urandom_range(0, 3) != 0);
        #1;
        if (stall) stalls_seen++;
        check(!cmd_ready && busy, "busy during a layer");
        if (ext) check(stall == !in_valid || !(step || stall), "stall exactly when input missing");
        if (step) begin
          if (int'(step_idx) != steps % nsteps) ok_idx = 0;
          if (step_first != (steps == 0)) ok_first = 0;
          check(col_step == par && acc_en == !par && in_ready == ext, "step qualifiers follow the mode");
          steps++;
          last_step_cyc = cyc;
        end
        if (eval) eval_cyc = cyc;
        if (done) begin
          done_cyc = cyc;
          check(swap, "swap with done");
          check(capture_rows == !par && out_finish == par, "capture or finish by mode");
        end
        @(negedge clk);
        cyc++;
      end
      in_valid = 0;
      check(steps == exp_steps, $sformatf("steps got %0d exp %0d", steps, exp_steps));
      check(ok_idx, "word index sequence");
      check(ok_first, "step_first only on the first step");
      check(done_cyc == last_step_cyc + 3, $sformatf("done %0d cycles after last step", done_cyc - last_step_cyc));
      if (!par) check(eval_cyc == last_step_cyc + 1, "eval right after the last step");
      check(cmd_ready, "ready again after done");
    end
    check(stalls_seen > 0, "input stalls were exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
