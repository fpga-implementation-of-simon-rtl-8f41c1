// tb_simon_top_full: the core at its default configuration (128-bit key,
// 68 rounds) encrypts the published SIMON-128/128 test vector and a few
// random blocks; each ciphertext and the 68-cycle start-to-done latency are
// checked against the reference model.
module tb_simon_top_full;
  import simon_ref_pkg::*;

  logic         clk = 0, nrst = 0, start = 0, done;
  logic [127:0] pt = '0, ct;
  logic [127:0] key = '0;
  int           checks = 0, failures = 0;

  simon_top dut (.clk, .nrst, .start, .plaintext(pt), .key, .ciphertext(ct), .done);

  always #5 clk = ~clk;

  task automatic encrypt(w64_t kin [4], logic [127:0] p, logic [127:0] expv);
    int cyc;
    pt = p;
    key = {kin[1], kin[0]};
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done && cyc < 200) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 68) begin failures++; $display("FAIL latency %0d", cyc); end
    checks++;
    if (ct !== expv) begin failures++; $display("FAIL ciphertext %h exp %h", ct, expv); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w64_t kin [4];
    logic [127:0] p, e;
    #12 nrst = 1;
    ref_vector(2, kin, p, e);
    encrypt(kin, p, e);
    $display("SIMON-128/128 test vector: ciphertext %h", ct);
    for (int n = 0; n < 8; n++) begin
      for (int j = 0; j < 4; j++) kin[j] = {$urandom, $urandom};
      p = {$urandom, $urandom, $urandom, $urandom};
      encrypt(kin, p, ref_encrypt(2, kin, p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
