// simon_top: SIMON-128 block-cipher encryption core.
//
// Encrypts one 128-bit block with a key of KEY_WORDS 64-bit words (2, 3 or 4:
// a 128-, 192- or 256-bit key, taking 68, 69 or 72 rounds). Three parts, as
// in the design's block diagram: the datapath (simon_dp) holding the block
// and applying one round per cycle, the key schedule (simon_ks) producing the
// round key rkey of each round, and the controller (simon_ctrl) that counts
// rounds and drives compute and done. start goes to the controller and, as
// the key load, to the key schedule; it also loads the plaintext into the
// datapath.
//
// Interface: plaintext = {left word, right word}; key holds k_0 in bits
// 63:0. Plaintext and key must be valid in the cycle where start is high.
// done rises ROUNDS clock cycles later and stays high, with the ciphertext
// on its output, until the next start. A start during a run restarts it.
//
// The structure, port names and round counts follow the design; the exact
// cycle timing, the plaintext load path and the reset are this
// implementation's choices. Encryption only.
module simon_top
  import simon_pkg::*;
#(
  parameter int unsigned KEY_WORDS = 2
) (
  input  logic                        clk,
  input  logic                        nrst,
  input  logic                        start,
  input  logic [BLOCK_W-1:0]          plaintext,
  input  logic [KEY_WORDS*WORD_W-1:0] key,
  output logic [BLOCK_W-1:0]          ciphertext,
  output logic                        done
);

  localparam int unsigned ROUNDS = rounds_for(KEY_WORDS);

  logic  compute;
  word_t rkey;

  simon_ctrl #(.ROUNDS(ROUNDS)) u_ctrl (
    .clk, .nrst, .start, .compute, .done
  );

  simon_ks #(.KEY_WORDS(KEY_WORDS)) u_ks (
    .clk, .nrst, .load(start), .compute, .key, .rkey
  );

  simon_dp u_dp (
    .clk, .nrst, .load(start), .compute, .plaintext, .rkey, .ciphertext
  );

endmodule
