// tb_simon_top: end-to-end test of the SIMON-128 core for all three key
// sizes. One core per key size (128-, 192- and 256-bit keys) encrypts the
// published test vector and random blocks; each result is compared with the
// reference model and the start-to-done latency with the round count
// (68/69/72 cycles). It also exercises the core's mechanisms and counts
// them: done holding its value, back-to-back operations, a start in the
// middle of a run restarting it, and an asynchronous reset during a run.
// A mechanism that never happened counts as a failure.
module tb_simon_top;
  import simon_ref_pkg::*;

  logic         clk = 0, nrst = 0;
  logic         start [3];
  logic [127:0] pt [3];
  logic [255:0] key [3];
  logic [127:0] ct [3];
  logic         done [3];
  int           checks = 0, failures = 0;
  int           n_hold = 0, n_b2b = 0, n_restart = 0, n_reset = 0, n_ops = 0;

  simon_top                 u128 (.clk, .nrst, .start(start[0]), .plaintext(pt[0]), .key(key[0][127:0]),
                                  .ciphertext(ct[0]), .done(done[0]));
  simon_top #(.KEY_WORDS(3)) u192 (.clk, .nrst, .start(start[1]), .plaintext(pt[1]), .key(key[1][191:0]),
                                  .ciphertext(ct[1]), .done(done[1]));
  simon_top #(.KEY_WORDS(4)) u256 (.clk, .nrst, .start(start[2]), .plaintext(pt[2]), .key(key[2]),
                                  .ciphertext(ct[2]), .done(done[2]));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // One encryption on core s (m = s + 2): start, wait for done, check data and latency
  task automatic encrypt(int s, w64_t kin [4], logic [127:0] p, logic [127:0] expv);
    int m, cyc;
    m = s + 2;
    pt[s]  = p;
    key[s] = {kin[3], kin[2], kin[1], kin[0]};
    @(negedge clk) start[s] = 1;
    @(negedge clk) begin
      start[s] = 0;
      pt[s] = '1;                 // inputs only need to be valid with start
      key[s] = '1;
    end
    cyc = 0;
    while (!done[s] && cyc < 200) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == ref_rounds(m), $sformatf("m=%0d latency %0d exp %0d", m, cyc, ref_rounds(m)));
    check(ct[s] === expv, $sformatf("m=%0d ciphertext %h exp %h", m, ct[s], expv));
    n_ops++;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w64_t kin [4];
    logic [127:0] p, e;
    for (int s = 0; s < 3; s++) begin start[s] = 0; pt[s] = '0; key[s] = '0; end
    #12 nrst = 1;

    // published test vectors
    for (int s = 0; s < 3; s++) begin
      ref_vector(s + 2, kin, p, e);
      encrypt(s, kin, p, e);
      // done and ciphertext hold while idle
      repeat (5) @(negedge clk);
      check(done[s] && ct[s] === e, "hold after done");
      n_hold++;
    end

    // random blocks and keys, back to back (start in the DONE state)
    for (int n = 0; n < 15; n++) begin
      for (int s = 0; s < 3; s++) begin
        for (int j = 0; j < 4; j++) kin[j] = {$urandom, $urandom};
        p = {$urandom, $urandom, $urandom, $urandom};
        encrypt(s, kin, p, ref_encrypt(s + 2, kin, p));
        n_b2b++;
      end
    end

    // restart: a start in the middle of a run begins a new operation
    for (int s = 0; s < 3; s++) begin
      for (int j = 0; j < 4; j++) kin[j] = {$urandom, $urandom};
      pt[s] = '0; key[s] = '0;
      @(negedge clk) start[s] = 1;
      @(negedge clk) start[s] = 0;
      repeat ($urandom_range(40, 5)) @(negedge clk);
      check(!done[s], "running before restart");
      p = {$urandom, $urandom, $urandom, $urandom};
      encrypt(s, kin, p, ref_encrypt(s + 2, kin, p));
      n_restart++;
    end

    // asynchronous reset during a run clears the core, which then works again
    @(negedge clk) start[0] = 1;
    @(negedge clk) start[0] = 0;
    repeat (10) @(negedge clk);
    #2 nrst = 0;
    #1 check(!done[0] && ct[0] === '0, "reset clears state");
    @(negedge clk) nrst = 1;
    repeat (3) @(negedge clk);
    check(!done[0], "idle after reset");
    n_reset++;
    ref_vector(2, kin, p, e);
    encrypt(0, kin, p, e);

    check(n_hold > 0,    "mechanism: done hold never exercised");
    check(n_b2b > 0,     "mechanism: back-to-back never exercised");
    check(n_restart > 0, "mechanism: restart never exercised");
    check(n_reset > 0,   "mechanism: reset during run never exercised");
    $display("operations=%0d hold=%0d back_to_back=%0d restart=%0d reset=%0d",
             n_ops, n_hold, n_b2b, n_restart, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
