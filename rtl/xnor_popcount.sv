// xnor_popcount: the multiplier-free dot product of a BNN cell.
//
// With +1 coded as 1 and -1 as 0, the product of a binary weight and a binary
// input is their XNOR, and the sum over a word is the number of ones. This
// block forms the 32 XNORs of a data word and a weight word and counts the
// ones with a popcount adder tree. Purely combinational: pc is valid in the
// same cycle as data and weight. The count needs 6 bits (0..32).
module xnor_popcount
  import bnn_pkg::*;
(
  input  word_t           data,
  input  word_t           weight,
  output logic [PC_W-1:0] pc
);

  word_t agree;
  assign agree = ~(data ^ weight);

  popcount_tree #(.N_IN(WORD), .IN_W(1), .OUT_W(PC_W)) u_pc (
    .in  (agree),
    .sum (pc)
  );

endmodule
