// simon_dp: SIMON-128 datapath, one round per clock cycle.
//
// The 128-bit block lives in two 64-bit registers, l (left word, bits
// 127:64 of the block) and r (right word, bits 63:0). A load pulse copies the
// plaintext into them; in every cycle with compute high, one instance of
// simon_round replaces {l, r} with the round result, using the round key
// delivered by the key schedule in the same cycle. After the last round the
// registers hold the ciphertext, which stays on the output until the next
// load. load has priority over compute.
//
// The split into datapath, key schedule and controller and the names rkey
// and compute follow the block diagram of the design. Feeding the start
// pulse into the datapath as load, the one-round-per-cycle structure and the
// asynchronous active-low reset are this implementation's choices.
//
// Timing: plaintext is sampled at the clock edge where load is high; each
// compute edge performs one round.
module simon_dp
  import simon_pkg::*;
(
  input  logic               clk,
  input  logic               nrst,
  input  logic               load,
  input  logic               compute,
  input  logic [BLOCK_W-1:0] plaintext,
  input  word_t              rkey,
  output logic [BLOCK_W-1:0] ciphertext
);

  word_t l_q, r_q;
  word_t l_d, r_d;

  simon_round u_round (
    .l_i(l_q), .r_i(r_q), .k_i(rkey),
    .l_o(l_d), .r_o(r_d)
  );

  always_ff @(posedge clk or negedge nrst) begin
    if (!nrst) begin
      l_q <= '0;
      r_q <= '0;
    end else if (load) begin
      l_q <= plaintext[BLOCK_W-1:WORD_W];
      r_q <= plaintext[WORD_W-1:0];
    end else if (compute) begin
      l_q <= l_d;
      r_q <= r_d;
    end
  end

  assign ciphertext = {l_q, r_q};

endmodule
