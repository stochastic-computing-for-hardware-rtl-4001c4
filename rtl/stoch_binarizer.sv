// stoch_binarizer: turns 32 grayscale pixels into one stochastic binary word.
//
// Each pixel value p (0..255, read as p/255) becomes a bit that is 1 with
// probability p/255: lane i compares its own 8-bit LFSR value r (1..255) with
// the pixel and outputs r <= p. A pixel of 0 always gives 0, 255 always 1.
// Presenting the same image T times with the generators advancing gives T
// independent-looking binary versions of it, whose bits are summed later in
// the cell accumulators. The output is combinational from pix and the current
// LFSR states; take advances every lane's LFSR by one step.
// Lane i is seeded with 8*i+1, so all lanes run the same sequence at different
// phases. The use of one 8-bit LFSR per lane and the comparison rule are this
// design's choices; the published work names an 8-bit LFSR as the generator.
module stoch_binarizer
  import bnn_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         take,
  input  logic [WORD-1:0][PIX_W-1:0]   pix,
  output word_t                        bits
);

  for (genvar i = 0; i < WORD; i++) begin : g_lane
    logic [7:0] r;
    lfsr8 #(.SEED(8'(8 * i + 1))) u_lfsr (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (take),
      .q     (r)
    );
    assign bits[i] = (r <= pix[i]);
  end

endmodule
