// simon_ks: SIMON-128 key schedule, generating round keys on the fly.
//
// A window of KEY_WORDS (m) 64-bit registers holds k_i .. k_{i+m-1}; the
// round key of the current round, k_i, is the lowest word. Each compute cycle
// the window shifts down by one word and the new top word is
//
//   tmp      = S^-3 k_{i+m-1}            (^ k_{i+1} when m = 4)
//   k_{i+m}  = c ^ z_j[i] ^ k_i ^ tmp ^ S^-1 tmp
//
// with c = 2^64 - 4 and z_j the 62-bit constant sequence that belongs to m
// (z2, z3, z4). The sequence sits in a 62-bit register that rotates right by
// one bit per round, so its bit 0 is always z_j[i] and enters the lowest bit
// of the new word. No round keys are stored.
//
// The equation, the m/z_j pairing and the right rotations follow the cipher
// description; c and the bits of z_j come from the SIMON specification. The
// load/compute interface and the asynchronous active-low reset are this
// implementation's choices.
//
// Interface: key holds k_0 in bits 63:0, k_1 in 127:64, and so on. The key is
// sampled at the clock edge where load is high; rkey is then k_0, and after
// the r-th compute edge it is k_r. load has priority over compute.
module simon_ks
  import simon_pkg::*;
#(
  parameter int unsigned KEY_WORDS = 2
) (
  input  logic                        clk,
  input  logic                        nrst,
  input  logic                        load,
  input  logic                        compute,
  input  logic [KEY_WORDS*WORD_W-1:0] key,
  output word_t                       rkey
);

  localparam zseq_t Z_INIT = zseq_for(KEY_WORDS);

  word_t win_q [KEY_WORDS];
  zseq_t z_q;
  word_t tmp, k_new;

  always_comb begin
    tmp = ror(win_q[KEY_WORDS-1], 3);
    if (KEY_WORDS == 4) tmp = tmp ^ win_q[1];
    tmp   = tmp ^ ror(tmp, 1);
    k_new = KS_CONST ^ word_t'(z_q[0]) ^ win_q[0] ^ tmp;
  end

  always_ff @(posedge clk or negedge nrst) begin
    if (!nrst) begin
      for (int j = 0; j < KEY_WORDS; j++) win_q[j] <= '0;
      z_q <= Z_INIT;
    end else if (load) begin
      for (int j = 0; j < KEY_WORDS; j++) win_q[j] <= key[j*WORD_W +: WORD_W];
      z_q <= Z_INIT;
    end else if (compute) begin
      for (int j = 0; j < KEY_WORDS - 1; j++) win_q[j] <= win_q[j+1];
      win_q[KEY_WORDS-1] <= k_new;
      z_q <= {z_q[0], z_q[Z_LEN-1:1]};
    end
  end

  assign rkey = win_q[0];

  initial begin
    assert (KEY_WORDS >= 2 && KEY_WORDS <= 4)
      else $error("simon_ks: KEY_WORDS must be 2, 3 or 4");
  end

endmodule
