// simon_pkg: constants and helper functions shared by the SIMON-128 core.
//
// SIMON-128 works on a 128-bit block split into two 64-bit words. The key has
// m = 2, 3 or 4 words (128, 192 or 256 bits); m selects the round count (68,
// 69, 72) and which 62-bit round-constant sequence z_j (z2, z3, z4) the key
// schedule uses. The table of m, z_j and rounds follows the SIMON-128 rows of
// the cipher's parameter table. The bits of each z_j sequence and the key
// schedule constant c = 2^64 - 4 are those of the SIMON specification; they
// are stored here so that bit i of the vector is the i-th element z_j[i].
package simon_pkg;

  localparam int unsigned WORD_W  = 64;            // n, bits per word
  localparam int unsigned BLOCK_W = 2 * WORD_W;    // 128-bit block
  localparam int unsigned Z_LEN   = 62;            // period of the z sequences

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [Z_LEN-1:0]  zseq_t;

  // c = 2^n - 4: all ones except the two lowest bits
  localparam word_t KS_CONST = {{(WORD_W-2){1'b1}}, 2'b00};

  // z sequences, bit i = z_j[i]
  localparam zseq_t Z2 = 62'h3369f885192c0ef5;
  localparam zseq_t Z3 = 62'h3c2ce51207a635db;
  localparam zseq_t Z4 = 62'h3dc94c3a046d678b;

  // Number of rounds for a key of m words
  function automatic int unsigned rounds_for(input int unsigned m);
    case (m)
      2:       return 68;
      3:       return 69;
      default: return 72;
    endcase
  endfunction

  // Round-constant sequence for a key of m words
  function automatic zseq_t zseq_for(input int unsigned m);
    case (m)
      2:       return Z2;
      3:       return Z3;
      default: return Z4;
    endcase
  endfunction

  // Left rotation by j bits (S^j); a right rotation is rol(x, WORD_W - j)
  function automatic word_t rol(input word_t x, input int unsigned j);
    return (x << j) | (x >> (WORD_W - j));
  endfunction

  function automatic word_t ror(input word_t x, input int unsigned j);
    return (x >> j) | (x << (WORD_W - j));
  endfunction

endpackage
