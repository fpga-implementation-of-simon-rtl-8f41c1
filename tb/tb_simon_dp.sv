// tb_simon_dp: drives the datapath with the round keys of the reference key
// expansion, with random idle cycles between rounds, and checks the result
// against the published test vectors and random blocks. Also checks that the
// block register holds while compute is low and that load wins over compute.
module tb_simon_dp;
  import simon_ref_pkg::*;

  logic         clk = 0, nrst = 0, load = 0, compute = 0;
  logic [127:0] pt, ct, exp_ct;
  w64_t         rkey = '0;
  w64_t         kin [4];
  w64_t         ks [72];
  int           checks = 0, failures = 0, stalls = 0;

  simon_dp dut (.clk, .nrst, .load, .compute, .plaintext(pt), .rkey, .ciphertext(ct));

  always #5 clk = ~clk;

  task automatic check(logic [127:0] got, logic [127:0] expv, string what);
    checks++;
    if (got !== expv) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, expv);
    end
  endtask

  task automatic run(int m, logic [127:0] p);
    ref_expand(m, kin, ks);
    pt = p;
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    check(ct, p, "load");
    for (int i = 0; i < ref_rounds(m); i++) begin
      if ($urandom_range(3) == 0) begin
        @(negedge clk);            // idle cycle: state must hold
        stalls++;
      end
      rkey = ks[i]; compute = 1;
      @(negedge clk) compute = 0;
    end
    @(negedge clk);
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pt = '0;
    #12 nrst = 1;
    for (int m = 2; m <= 4; m++) begin
      ref_vector(m, kin, pt, exp_ct);
      run(m, pt);
      check(ct, exp_ct, "test vector");
    end
    for (int n = 0; n < 20; n++) begin
      int m;
      m = 2 + $urandom_range(2);
      for (int j = 0; j < 4; j++) kin[j] = {$urandom, $urandom};
      exp_ct = ref_encrypt(m, kin, {$urandom, $urandom, $urandom, $urandom});
      run(m, {$urandom, $urandom, $urandom, $urandom});
      check(ct, ref_encrypt(m, kin, pt), "random block");
      repeat (3) @(negedge clk);
      check(ct, ref_encrypt(m, kin, pt), "hold after run");
    end
    // load has priority over compute
    pt = 128'h0123456789abcdeffedcba9876543210;
    @(negedge clk) begin load = 1; compute = 1; end
    @(negedge clk) begin load = 0; compute = 0; end
    check(ct, pt, "load over compute");
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no idle cycles exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
