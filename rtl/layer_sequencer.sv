// layer_sequencer: runs one network layer on the array per command.
//
// Sequential mode (one neuron per cell), following the stochastic first-layer
// algorithm: for each of T presentations, for each input word k, the word is
// broadcast to all rows while every cell reads weight word w_base + k and adds
// its popcount to its register (cleared by the very first step). When the
// words come from the stochastic input (src_ext), a step waits for in_valid
// and takes one binarized pixel word (in_ready); a missing word stalls the
// layer. After the last step the cells compare with their threshold (eval),
// the sign bits are captured into the activation buffer, and the buffers swap.
// Parallel mode (one neuron per column): one step per group of 32 neurons g,
// row r carrying activation word r; the column results come back two cycles
// later and are written as activation word g; with argmax set, the winning
// neuron is reported at the end.
//
// Latency of a layer with S steps (no stalls), command accepted at cycle 0:
// steps in cycles 1..S, then 3 more cycles; done is high in cycle S+3 and the
// sequencer accepts a new command in cycle S+4.
// The command format and this exact schedule are this design's choices.
module layer_sequencer
  import bnn_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  layer_cmd_t                cmd,
  input  logic                      in_valid,
  output logic                      in_ready,
  output layer_cmd_t                cur,        // command being executed
  output logic                      busy,
  output logic                      step,
  output logic                      acc_en,
  output logic                      step_first,
  output logic                      col_step,
  output logic [W_AW-1:0]           step_idx,
  output logic                      eval,
  output logic                      capture_rows,
  output logic                      out_start,
  output logic                      out_finish,
  output logic                      swap,
  output logic                      stall,
  output logic                      done
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_EVAL, S_DRAIN, S_WAIT, S_FINISH} state_e;

  state_e          state;
  logic [W_AW-1:0] idx;
  logic [T_W-1:0]  pres;
  logic            seq_m, last_idx, last_pres, go;

  assign seq_m     = (cur.mode == MODE_SEQ);
  assign last_idx  = (idx == cur.n_steps_m1);
  assign last_pres = (pres == cur.n_pres_m1) || !seq_m;
  assign stall     = (state == S_RUN) && seq_m && cur.src_ext && !in_valid;
  assign go        = (state == S_RUN) && !stall;

  assign cmd_ready    = (state == S_IDLE);
  assign busy         = (state != S_IDLE);
  assign step         = go;
  assign acc_en       = go && seq_m;
  assign step_first   = go && (idx == '0) && (pres == '0);
  assign col_step     = go && !seq_m;
  assign step_idx     = idx;
  assign in_ready     = go && seq_m && cur.src_ext;
  assign eval         = (state == S_EVAL);
  assign capture_rows = (state == S_FINISH) && seq_m;
  assign out_start    = cmd_valid && cmd_ready;
  assign out_finish   = (state == S_FINISH) && !seq_m;
  assign swap         = (state == S_FINISH);
  assign done         = (state == S_FINISH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      pres  <= '0;
      cur   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cur   <= cmd;
          idx   <= '0;
          pres  <= '0;
          state <= S_RUN;
        end
        S_RUN: if (go) begin
          if (last_idx) begin
            idx <= '0;
            if (last_pres) state <= seq_m ? S_EVAL : S_DRAIN;
            else           pres  <= pres + 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_EVAL:   state <= S_WAIT;
        S_DRAIN:  state <= S_WAIT;
        S_WAIT:   state <= S_FINISH;
        S_FINISH: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // A parallel layer can only write 32 activation words.
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd.mode == MODE_PAR && !cmd.argmax) |-> (cmd.n_steps_m1 < W_AW'(ROWS)));
  // A sequential layer reading the activation buffer reads at most 32 words.
  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd.mode == MODE_SEQ && !cmd.src_ext) |-> (cmd.n_steps_m1 < W_AW'(ROWS)));

endmodule
