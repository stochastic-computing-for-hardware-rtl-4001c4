// column_neuron: the neuron formed by one column of cells in parallel mode.
//
// In parallel mode each of the 32 rows carries a different 32-bit input word,
// so the 32 cells of a column together see 1024 inputs. Their 6-bit popcounts
// are summed by a popcount tree shared along the column, the column threshold
// for the current weight address is subtracted, and the sign bit of the
// difference is the column's activation. The signed difference z - mu is also
// given out, for the argmax of the last layer.
//
// Timing: step/step_addr at cycle t (the same cycle the cells read their
// weights); the cells' pc is valid at t+1, where the sum is formed; score,
// act and valid are registered at the end of t+1. Column thresholds are held
// in a 64-entry memory addressed like the weights, one per neuron group. The
// column threshold store and its addressing are this design's choices; the
// published text only says the column output is compared with mu the same way
// as in a cell.
module column_neuron
  import bnn_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         mu_we,
  input  logic [W_AW-1:0]              p_addr,
  input  word_t                        p_wdata,
  input  logic                         step,
  input  logic [W_AW-1:0]              step_addr,
  input  logic [ROWS-1:0][PC_W-1:0]    pc_in,
  output logic                         valid,
  output logic signed [SCORE_W-1:0]    score,
  output logic                         act
);

  logic [CSUM_W-1:0]        sum;
  logic [CSUM_W-1:0]        mu;
  logic                     step_q;
  logic signed [SCORE_W-1:0] diff;

  popcount_tree #(.N_IN(ROWS), .IN_W(PC_W), .OUT_W(CSUM_W)) u_tree (
    .in  (pc_in),
    .sum (sum)
  );

  mram_array #(.DEPTH(W_DEPTH), .WIDTH(CSUM_W)) u_mu (
    .clk   (clk),
    .we    (mu_we),
    .re    (step),
    .addr  (mu_we ? p_addr : step_addr),
    .wdata (p_wdata[CSUM_W-1:0]),
    .rdata (mu)
  );

  assign diff = signed'({1'b0, sum}) - signed'({1'b0, mu});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_q <= 1'b0;
      valid  <= 1'b0;
      score  <= '0;
      act    <= 1'b0;
    end else begin
      step_q <= step;
      valid  <= step_q;
      if (step_q) begin
        score <= diff;
        act   <= ~diff[SCORE_W-1];
      end
    end
  end

endmodule
