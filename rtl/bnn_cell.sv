// bnn_cell: the basic cell repeated 32 x 32 times in the array.
//
// Upper part: a 2 kbit weight memory (64 words of 32 bits), 32 XNOR gates and
// a 32-bit popcount. Lower (sequential) part: an adder and register that sum
// the popcounts word after word, a small threshold (mu) memory, and a
// subtractor whose sign bit, stored in a flip-flop, is the neuron's binary
// activation. In sequential mode the cell is a whole neuron; in parallel mode
// only its popcount output pc is used, by the column popcount tree.
//
// Timing (all on the rising edge of clk):
//   cycle t   : step=1, step_addr and data presented; the weight word is read.
//   cycle t+1 : pc = popcount(XNOR(data, weight)) is valid. If acc_en was set
//               at t, the register takes pc (step_first) or acc + pc.
//   eval at e : the mu entry mu_addr is read; at e+1 the register and mu are
//               compared and act is loaded at the end of e+1. eval may be
//               issued in the cycle after the last step.
// act = 1 (neuron +1) when acc - mu >= 0, i.e. when the subtraction's sign bit
// is 0. Programming (w_we, mu_we) shares the memory ports and must not overlap
// compute steps. The sum over T stochastic presentations happens in the
// register; the stored mu is therefore the threshold already scaled by T.
// The structure follows the published cell; the read latency, the way mu is
// addressed and sign(0) = +1 are this design's choices.
module bnn_cell
  import bnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // programming
  input  logic              w_we,
  input  logic              mu_we,
  input  logic [W_AW-1:0]   p_addr,
  input  word_t             p_wdata,
  // compute
  input  logic              step,
  input  logic              acc_en,
  input  logic              step_first,
  input  logic [W_AW-1:0]   step_addr,
  input  word_t             data,
  input  logic              eval,
  input  logic [MU_AW-1:0]  mu_addr,
  // outputs
  output logic [PC_W-1:0]   pc,
  output logic [ACC_W-1:0]  acc,
  output logic              act
);

  word_t            weight;
  word_t            data_q;
  logic             acc_q_en, first_q, eval_q;
  logic [ACC_W-1:0] mu;
  logic [ACC_W:0]   diff;

  mram_array #(.DEPTH(W_DEPTH), .WIDTH(WORD)) u_weights (
    .clk   (clk),
    .we    (w_we),
    .re    (step),
    .addr  (w_we ? p_addr : step_addr),
    .wdata (p_wdata),
    .rdata (weight)
  );

  mram_array #(.DEPTH(MU_DEPTH), .WIDTH(ACC_W)) u_mu (
    .clk   (clk),
    .we    (mu_we),
    .re    (eval),
    .addr  (mu_we ? p_addr[MU_AW-1:0] : mu_addr),
    .wdata (p_wdata[ACC_W-1:0]),
    .rdata (mu)
  );

  xnor_popcount u_xp (
    .data   (data_q),
    .weight (weight),
    .pc     (pc)
  );

  always_ff @(posedge clk) begin
    if (step) data_q <= data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q_en <= 1'b0;
      first_q  <= 1'b0;
      eval_q   <= 1'b0;
    end else begin
      acc_q_en <= step & acc_en;
      first_q  <= step_first;
      eval_q   <= eval;
    end
  end

  // Sequential popcount: register plus adder.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (acc_q_en) acc <= (first_q ? '0 : acc) + ACC_W'(pc);
  end

  // Subtractor; its sign bit gives the activation.
  assign diff = {1'b0, acc} - {1'b0, mu};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      act <= 1'b0;
    else if (eval_q) act <= ~diff[ACC_W];
  end

endmodule
