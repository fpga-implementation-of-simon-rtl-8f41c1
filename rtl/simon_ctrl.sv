// simon_ctrl: controller of the SIMON-128 core.
//
// A three-state machine (IDLE, RUN, DONE) with a round counter. A start pulse
// sampled at a clock edge moves it to RUN with the counter at zero, from any
// state, so a new start also restarts a run in progress. In RUN, compute is
// high for exactly ROUNDS cycles, one round of the datapath and key schedule
// each; after the last of them the machine enters DONE, where done is high
// until the next start. compute and done are never high together.
//
// The start/done handshake is the one the design specifies; the states, the
// restart-on-start behaviour, done staying high and the asynchronous
// active-low reset are this implementation's choices.
//
// Timing: done rises ROUNDS clock cycles after the edge that samples start.
module simon_ctrl #(
  parameter int unsigned ROUNDS = 68
) (
  input  logic clk,
  input  logic nrst,
  input  logic start,
  output logic compute,
  output logic done
);

  localparam int unsigned CNT_W = $clog2(ROUNDS);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;

  state_t             state_q;
  logic [CNT_W-1:0]   cnt_q;

  localparam logic [CNT_W-1:0] LAST = CNT_W'(ROUNDS - 1);

  always_ff @(posedge clk or negedge nrst) begin
    if (!nrst) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
    end else if (start) begin
      state_q <= S_RUN;
      cnt_q   <= '0;
    end else if (state_q == S_RUN) begin
      if (cnt_q == LAST) state_q <= S_DONE;
      cnt_q <= cnt_q + 1'b1;
    end
  end

  assign compute = (state_q == S_RUN);
  assign done    = (state_q == S_DONE);

  // compute and done are mutually exclusive
  a_excl: assert property (@(posedge clk) disable iff (!nrst) !(compute && done));
  // the counter never passes the last round while computing
  a_cnt:  assert property (@(posedge clk) disable iff (!nrst) compute |-> cnt_q <= LAST);

endmodule
