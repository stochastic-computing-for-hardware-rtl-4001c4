// lfsr8: eight-bit linear feedback shift register, the pseudo random source
// suggested for generating the stochastic input bits.
//
// Fibonacci form with the maximal-length polynomial x^8 + x^6 + x^5 + x^4 + 1:
// the state walks through all 255 non-zero values before repeating. It loads
// SEED at reset and advances once per cycle in which en is high. The
// polynomial and the seeding are this design's choices.
module lfsr8 #(
  parameter logic [7:0] SEED = 8'h01
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  output logic [7:0] q
);

  logic fb;
  assign fb = q[7] ^ q[5] ^ q[4] ^ q[3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {q[6:0], fb};
  end

  initial assert (SEED != 8'h00) else $error("lfsr8: SEED must be non-zero");

endmodule
