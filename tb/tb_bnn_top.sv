// tb_bnn_top: end-to-end inference on the full 32 x 32 array.
//
// Builds a network of the Fashion-MNIST shape used to evaluate the design:
// 784 stochastic binary inputs -> 1024 -> 1024 -> 10, with pseudo-random
// weights, thresholds and a pseudo-random 28 x 28 grayscale image, all
// computed by hash functions so no data files are needed. Memory map per
// cell (r, c):
//   addresses  0..24  layer 1, neuron 32r+c, input word k  (sequential mode)
//   addresses 25..56  layer 2, neuron 32r+c, input word k  (sequential mode)
//   address   57      layer 3, neuron c, inputs 32r..32r+31 (parallel mode)
//   addresses 58..63  extra parallel layer, neuron 32g+c at address 58+g
//   threshold 0 / 1   layer 1 (already multiplied by T) / layer 2
// and column c's thresholds at addresses 57..63 belong to the parallel neurons.
// Padding inputs 784..799 are fed pixel 0 (bit 0) against weight 1, so they
// never count.
// The test programs everything through the host port, runs layer 1 with T = 3
// presentations of the image (the input valid signal is randomly withheld to
// force stalls), layer 2 from the activation buffer, and layer 3 in parallel
// mode with the argmax over 10 outputs. For the first image an extra
// parallel layer of 192 neurons (6 groups, weights at addresses 58..63) runs
// on the layer-2 activations, after which the host writes those activations
// back into the buffer. Further images are classified with T = 8, the largest
// T the accumulators are sized for, and with T = 1. After every layer
// the 32 activation words are read back and compared with a reference model
// written here from the algorithm (its own LFSR model, XNOR/popcount sums,
// thresholds, argmax). Cycle counts of the layers are checked against
// steps + 3 plus stall cycles. Each mechanism (sequential layer, parallel
// layer, T > 1 accumulation, input stall, argmax, layer fed from the buffer,
// parallel layer over several groups, host buffer write) is counted and must
// occur.
module tb_bnn_top;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int N_IN  = 784;
  localparam int N_H   = 1024;
  localparam int N_OUT = 10;
  localparam int L1_W  = (N_IN + WORD - 1) / WORD;   // 25 words
  localparam int L1_BASE = 0, L2_BASE = 25, L3_BASE = 57, LP_BASE = 58;
  localparam int LP_GROUPS = 6;                        // extra parallel layer 1024 -> 192

  logic                        prog_valid, prog_ready, cmd_valid, cmd_ready, in_valid, in_ready;
  prog_t                       prog;
  layer_cmd_t                  cmd;
  logic [WORD-1:0][PIX_W-1:0]  in_pix;
  logic                        buf_we;
  logic [4:0]                  buf_waddr, buf_raddr;
  word_t                       buf_wdata, buf_rdata;
  logic                        done, result_valid;
  logic [IDX_W:0]              result_class;
  logic signed [SCORE_W-1:0]   result_score;

  bnn_top dut (.*);

  // mechanism counters
  int n_seq_layers, n_par_layers, n_multi_t, n_stalls, n_argmax, n_from_buf, n_multi_group, n_host_write;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- data generators ----------------
  function automatic logic [31:0] mix(input int a, input int b, input int c);
    logic [31:0] h;
    h = (32'(a) * 32'h9E3779B1) ^ (32'(b) * 32'h85EBCA77) ^ (32'(c) * 32'hC2B2AE3D) ^ 32'h165667B1;
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12); h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  function automatic bit wbit(input int layer, input int n, input int i);
    if (layer == 1 && i >= N_IN) return 1'b1;          // padding never counts
    return mix(layer, n, i)[7];
  endfunction

  function automatic word_t wword(input int layer, input int n, input int k);
    word_t w;
    for (int b = 0; b < WORD; b++) w[b] = wbit(layer, n, WORD * k + b);
    return w;
  endfunction

  function automatic int pixel(input int img, input int i);
    logic [31:0] h;
    if (i >= N_IN) return 0;
    h = mix(100 + img, 7, i);
    // a quarter of the pixels black, a few white, the rest gray
    if (h[9:8] == 2'b00) return 0;
    if (h[12:10] == 3'b000) return 255;
    return int'(h[7:0]);
  endfunction

  function automatic int mu1(input int n, input int t);
    return t * (N_IN / 2) + int'(mix(11, n, 0) % 61) - 30;
  endfunction
  function automatic int mu2(input int n);
    return N_H / 2 + int'(mix(12, n, 0) % 41) - 20;
  endfunction
  function automatic int mu3(input int j);
    return N_H / 2 + int'(mix(13, j, 0) % 21) - 10;
  endfunction

  function automatic int mu4(input int n);
    return N_H / 2 + int'(mix(14, n, 0) % 31) - 15;
  endfunction

  function automatic int agree(input word_t a, input word_t b);
    return $countones(~(a ^ b));
  endfunction

  // ---------------- reference model state ----------------
  logic [7:0] lfsr_m [WORD];
  word_t      a1 [ROWS], a2 [ROWS], a3w;

  function automatic logic [7:0] lfsr_next(input logic [7:0] q);
    return {q[6:0], q[7] ^ q[5] ^ q[4] ^ q[3]};
  endfunction

  // ---------------- host tasks ----------------
  task automatic prog_write(input prog_sel_e sel, input int r, input int c, input int a, input word_t d);
    prog_valid = 1'b1;
    prog.sel = sel; prog.row = 5'(r); prog.col = 5'(c); prog.addr = W_AW'(a); prog.data = d;
    #1;
    while (!prog_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    prog_valid = 1'b0;
  endtask

  task automatic program_network(input int t);
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        int n;
        n = WORD * r + c;
        for (int k = 0; k < L1_W; k++) prog_write(PROG_WEIGHT, r, c, L1_BASE + k, wword(1, n, k));
        for (int k = 0; k < ROWS; k++) prog_write(PROG_WEIGHT, r, c, L2_BASE + k, wword(2, n, k));
        prog_write(PROG_WEIGHT, r, c, L3_BASE, wword(3, c, r));
        for (int g = 0; g < LP_GROUPS; g++)
          prog_write(PROG_WEIGHT, r, c, LP_BASE + g, wword(4, WORD * g + c, r));
        prog_write(PROG_CELL_MU, r, c, 0, word_t'(mu1(n, t)));
        prog_write(PROG_CELL_MU, r, c, 1, word_t'(mu2(n)));
      end
    end
    for (int c = 0; c < COLS; c++) begin
      prog_write(PROG_COL_MU, 0, c, L3_BASE, word_t'(mu3(c)));
      for (int g = 0; g < LP_GROUPS; g++)
        prog_write(PROG_COL_MU, 0, c, LP_BASE + g, word_t'(mu4(WORD * g + c)));
    end
  endtask

  task automatic set_t(input int t);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        prog_write(PROG_CELL_MU, r, c, 0, word_t'(mu1(WORD * r + c, t)));
  endtask

  // Issues a command and returns the cycles from acceptance to done.
  task automatic run_layer(input layer_cmd_t c, input int img, output int cycles, output int stalls);
    int widx;
    cmd = c;
    cmd_valid = 1'b1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 1'b0;
    cycles = 0; stalls = 0; widx = 0;
    forever begin
      in_valid = c.src_ext && ($urandom_range(0, 3) != 0);
      for (int b = 0; b < WORD; b++) in_pix[b] = 8'(pixel(img, WORD * (widx % L1_W) + b));
      #1;
      cycles++;
      if (c.src_ext && !in_valid && dut.u_seq.stall) stalls++;
      if (in_ready) widx++;
      if (done) break;
      @(negedge clk);
    end
    @(negedge clk);
    in_valid = 1'b0;
    n_stalls += stalls;
  endtask

  task automatic read_buffer(output word_t w [ROWS]);
    for (int r = 0; r < ROWS; r++) begin
      buf_raddr = 5'(r); #1; w[r] = buf_rdata;
    end
  endtask

  // Reference: layer 1 over t presentations, advancing the lane LFSR models.
  task automatic ref_layer1(input int img, input int t);
    int z [N_H];
    for (int n = 0; n < N_H; n++) z[n] = 0;
    for (int p = 0; p < t; p++) begin
      for (int k = 0; k < L1_W; k++) begin
        word_t x;
        for (int b = 0; b < WORD; b++) begin
          x[b] = (int'(lfsr_m[b]) <= pixel(img, WORD * k + b));
          lfsr_m[b] = lfsr_next(lfsr_m[b]);
        end
        for (int n = 0; n < N_H; n++) z[n] += agree(x, wword(1, n, k));
      end
    end
    for (int n = 0; n < N_H; n++) a1[n / WORD][n % WORD] = (z[n] >= mu1(n, t));
  endtask

  task automatic ref_layer2();
    for (int n = 0; n < N_H; n++) begin
      int z;
      z = 0;
      for (int k = 0; k < ROWS; k++) z += agree(a1[k], wword(2, n, k));
      a2[n / WORD][n % WORD] = (z >= mu2(n));
    end
  endtask

  task automatic ref_layer3(output int cls, output int best);
    best = -100000; cls = -1;
    for (int j = 0; j < COLS; j++) begin
      int z;
      z = 0;
      for (int r = 0; r < ROWS; r++) z += agree(a2[r], wword(3, j, r));
      a3w[j] = (z >= mu3(j));
      if (j < N_OUT && z - mu3(j) > best) begin best = z - mu3(j); cls = j; end
    end
  endtask

  // Extra parallel layer over several neuron groups (no argmax): reads the
  // layer-2 activations, writes words 0..LP_GROUPS-1; afterwards the host
  // writes the layer-2 activations back so that layer 3 can run on them.
  task automatic side_parallel_layer(input int img);
    layer_cmd_t c;
    word_t got [ROWS];
    int cycles, stalls, mism;
    c = '0;
    c.mode = MODE_PAR; c.w_base = W_AW'(LP_BASE); c.n_steps_m1 = W_AW'(LP_GROUPS - 1);
    run_layer(c, img, cycles, stalls);
    n_par_layers++;
    n_multi_group++;
    check(cycles == LP_GROUPS + 3, $sformatf("parallel side layer took %0d cycles, expected %0d", cycles, LP_GROUPS + 3));
    read_buffer(got);
    mism = 0;
    for (int g = 0; g < LP_GROUPS; g++) begin
      for (int cc = 0; cc < COLS; cc++) begin
        int z, n;
        n = WORD * g + cc;
        z = 0;
        for (int r = 0; r < ROWS; r++) z += agree(a2[r], wword(4, n, r));
        if (got[g][cc] != (z >= mu4(n))) mism++;
      end
    end
    check(mism == 0, $sformatf("parallel side layer: %0d of %0d activations differ", mism, LP_GROUPS * WORD));
    for (int r = 0; r < ROWS; r++) begin
      buf_we = 1'b1; buf_waddr = 5'(r); buf_wdata = a2[r];
      @(negedge clk);
    end
    buf_we = 1'b0;
    read_buffer(got);
    mism = 0;
    for (int r = 0; r < ROWS; r++) mism += $countones(got[r] ^ a2[r]);
    check(mism == 0, "host write restored the layer-2 activations");
    n_host_write++;
  endtask

  task automatic classify(input int img, input int t, input bit side);
    layer_cmd_t c;
    word_t got [ROWS];
    int cycles, stalls, cls, best, mism;

    // layer 1: stochastic input, sequential mode, T presentations
    c = '0;
    c.mode = MODE_SEQ; c.src_ext = 1'b1; c.w_base = W_AW'(L1_BASE);
    c.n_steps_m1 = W_AW'(L1_W - 1); c.n_pres_m1 = T_W'(t - 1); c.mu_addr = '0;
    run_layer(c, img, cycles, stalls);
    ref_layer1(img, t);
    n_seq_layers++;
    if (t > 1) n_multi_t++;
    check(cycles == L1_W * t + stalls + 3,
          $sformatf("layer 1 took %0d cycles, expected %0d", cycles, L1_W * t + stalls + 3));
    read_buffer(got);
    mism = 0;
    for (int r = 0; r < ROWS; r++) mism += $countones(got[r] ^ a1[r]);
    check(mism == 0, $sformatf("image %0d T=%0d layer 1: %0d of 1024 activations differ", img, t, mism));
    begin
      int act_n;
      act_n = 0;
      for (int r = 0; r < ROWS; r++) act_n += $countones(a1[r]);
      $display("image %0d T=%0d layer 1: %0d of 1024 neurons active, %0d stall cycles", img, t, act_n, stalls);
    end

    // layer 2: from the activation buffer, sequential mode
    c = '0;
    c.mode = MODE_SEQ; c.src_ext = 1'b0; c.w_base = W_AW'(L2_BASE);
    c.n_steps_m1 = W_AW'(ROWS - 1); c.n_pres_m1 = '0; c.mu_addr = MU_AW'(1);
    run_layer(c, img, cycles, stalls);
    ref_layer2();
    n_seq_layers++;
    n_from_buf++;
    check(cycles == ROWS + 3, $sformatf("layer 2 took %0d cycles, expected %0d", cycles, ROWS + 3));
    read_buffer(got);
    mism = 0;
    for (int r = 0; r < ROWS; r++) mism += $countones(got[r] ^ a2[r]);
    check(mism == 0, $sformatf("image %0d layer 2: %0d of 1024 activations differ", img, mism));
    if (side) side_parallel_layer(img);

    // layer 3: parallel mode over the columns, argmax over 10 outputs
    c = '0;
    c.mode = MODE_PAR; c.w_base = W_AW'(L3_BASE); c.n_steps_m1 = '0;
    c.argmax = 1'b1; c.n_out = (IDX_W + 1)'(N_OUT);
    fork
      begin
        int waited;
        waited = 0;
        while (!result_valid && waited < 100) begin @(posedge clk); #1; waited++; end
      end
      run_layer(c, img, cycles, stalls);
    join
    ref_layer3(cls, best);
    n_par_layers++;
    check(cycles == 1 + 3, $sformatf("layer 3 took %0d cycles, expected 4", cycles));
    check(int'(result_class) == cls && int'(result_score) == best,
          $sformatf("image %0d: class %0d score %0d, expected %0d score %0d",
                    img, result_class, result_score, cls, best));
    if (int'(result_class) == cls) n_argmax++;
    read_buffer(got);
    check(got[0] == a3w, "layer 3 sign bits written as activation word 0");
    $display("image %0d T=%0d: class %0d (score %0d)", img, t, result_class, result_score);
  endtask

  initial begin
    prog_valid = 0; prog = '0; cmd_valid = 0; cmd = '0; in_valid = 0; in_pix = '0;
    buf_we = 0; buf_waddr = 0; buf_wdata = 0; buf_raddr = 0;
    n_seq_layers = 0; n_par_layers = 0; n_multi_t = 0; n_stalls = 0; n_argmax = 0; n_from_buf = 0;
    n_multi_group = 0; n_host_write = 0;
    for (int b = 0; b < WORD; b++) lfsr_m[b] = 8'(8 * b + 1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    program_network(3);
    classify(0, 3, 1'b1);
    set_t(8);
    classify(1, 8, 1'b0);
    set_t(1);
    classify(2, 1, 1'b0);

    check(n_seq_layers > 0, "sequential (cell-per-neuron) layers ran");
    check(n_par_layers > 0, "parallel (column-per-neuron) layers ran");
    check(n_multi_t > 0, "accumulation over several stochastic presentations ran");
    check(n_stalls > 0, "input stalls occurred");
    check(n_argmax > 0, "argmax results were produced");
    check(n_from_buf > 0, "a layer ran from the activation buffer");
    check(n_multi_group > 0, "a parallel layer over several neuron groups ran");
    check(n_host_write > 0, "the host wrote the activation buffer");
    $display("mechanisms: seq %0d par %0d multi-T %0d stalls %0d argmax %0d from-buffer %0d multi-group %0d host-write %0d",
             n_seq_layers, n_par_layers, n_multi_t, n_stalls, n_argmax, n_from_buf, n_multi_group, n_host_write);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
