// tb_simon_round: checks the combinational SIMON round against the reference
// model for fixed corner words and random words, and checks that the inverse
// round of the reference recovers the inputs from the outputs.
module tb_simon_round;
  import simon_ref_pkg::*;

  w64_t l, r, k, lo, ro, el, er, ul, ur;
  int   checks = 0, failures = 0;

  simon_round dut (.l_i(l), .r_i(r), .k_i(k), .l_o(lo), .r_o(ro));

  task automatic check_one();
    #1;
    ref_round(l, r, k, el, er);
    ref_unround(lo, ro, k, ul, ur);
    checks++;
    if (lo !== el || ro !== er) begin
      failures++;
      $display("FAIL l=%h r=%h k=%h got %h %h exp %h %h", l, r, k, lo, ro, el, er);
    end
    checks++;
    if (ul !== l || ur !== r) begin
      failures++;
      $display("FAIL inverse round does not recover inputs");
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // single-bit words expose the rotation amounts
    for (int b = 0; b < 64; b++) begin
      l = 64'd1 << b; r = '0; k = '0;
      check_one();
    end
    l = '1; r = '0; k = '0; check_one();
    l = '0; r = '1; k = '0; check_one();
    l = '0; r = '0; k = '1; check_one();
    for (int n = 0; n < 2000; n++) begin
      l = {$urandom, $urandom}; r = {$urandom, $urandom}; k = {$urandom, $urandom};
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
