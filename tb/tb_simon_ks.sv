// tb_simon_ks: checks every round key of the key schedule for m = 2, 3 and 4
// (one instance each) against the reference expansion, for the test-vector
// key and random keys, with random idle cycles in which rkey must hold.
module tb_simon_ks;
  import simon_ref_pkg::*;

  logic         clk = 0, nrst = 0, load = 0, compute = 0;
  logic [255:0] key = '0;
  w64_t         rk2, rk3, rk4;
  w64_t         kin [4];
  w64_t         ks [72];
  int           checks = 0, failures = 0, stalls = 0;

  simon_ks #(.KEY_WORDS(2)) u2 (.clk, .nrst, .load, .compute, .key(key[127:0]), .rkey(rk2));
  simon_ks #(.KEY_WORDS(3)) u3 (.clk, .nrst, .load, .compute, .key(key[191:0]), .rkey(rk3));
  simon_ks #(.KEY_WORDS(4)) u4 (.clk, .nrst, .load, .compute, .key(key),        .rkey(rk4));

  always #5 clk = ~clk;

  function automatic w64_t pick(int m);
    return (m == 2) ? rk2 : (m == 3) ? rk3 : rk4;
  endfunction

  task automatic run_all();
    w64_t e [3][72];
    for (int m = 2; m <= 4; m++) begin
      ref_expand(m, kin, ks);
      e[m-2] = ks;
    end
    key = {kin[3], kin[2], kin[1], kin[0]};
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    for (int i = 0; i < 72; i++) begin
      for (int m = 2; m <= 4; m++) begin
        if (i < ref_rounds(m)) begin
          checks++;
          if (pick(m) !== e[m-2][i]) begin
            failures++;
            $display("FAIL m=%0d round %0d: got %h exp %h", m, i, pick(m), e[m-2][i]);
          end
        end
      end
      if ($urandom_range(4) == 0) begin
        @(negedge clk);
        stalls++;
      end
      compute = 1;
      @(negedge clk) compute = 0;
    end
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12 nrst = 1;
    kin[0] = 64'h0706050403020100; kin[1] = 64'h0f0e0d0c0b0a0908;
    kin[2] = 64'h1716151413121110; kin[3] = 64'h1f1e1d1c1b1a1918;
    run_all();
    for (int n = 0; n < 10; n++) begin
      for (int j = 0; j < 4; j++) kin[j] = {$urandom, $urandom};
      run_all();
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no idle cycles exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
