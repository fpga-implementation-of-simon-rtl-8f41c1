// simon_round: one SIMON-128 encryption round, purely combinational.
//
//   l_o = (S^1 l & S^8 l) ^ S^2 l ^ r ^ k
//   r_o = l
//
// S^j is a left rotation by j bits, so the round is wiring plus one AND and
// three XOR gates per bit. This is the Feistel round of the cipher: the
// non-linear function F acts on the left word, its output is mixed with the
// right word and the round key, and the two halves trade places.
//
// Interface: l_i/r_i are the left/right 64-bit words of the block, k_i the
// round key; l_o/r_o the words after the round. No clock, no latency.
module simon_round
  import simon_pkg::*;
(
  input  word_t l_i,
  input  word_t r_i,
  input  word_t k_i,
  output word_t l_o,
  output word_t r_o
);

  word_t f;

  always_comb begin
    f   = (rol(l_i, 1) & rol(l_i, 8)) ^ rol(l_i, 2);
    l_o = f ^ r_i ^ k_i;
    r_o = l_i;
  end

endmodule
