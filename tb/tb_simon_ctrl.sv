// tb_simon_ctrl: checks the controller's cycle behaviour at its default of 68
// rounds: compute high for exactly 68 cycles after start, done rising 68
// cycles after the start edge and staying high, compute/done exclusive, a
// start during a run restarting the count, and reset returning to idle.
module tb_simon_ctrl;
  localparam int ROUNDS = 68;

  logic clk = 0, nrst = 1, start = 0;
  logic compute, done;
  int   checks = 0, failures = 0;

  simon_ctrl dut (.clk, .nrst, .start, .compute, .done);

  always #5 clk = ~clk;

  task automatic expect_eq(int got, int expv, string what);
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, expv);
    end
  endtask

  // pulse start, return the number of compute cycles and the cycle of done
  task automatic pulse_and_measure(output int ncomp, output int tdone);
    ncomp = 0; tdone = -1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;     // one edge has sampled start
    for (int c = 1; c <= ROUNDS + 10; c++) begin
      if (compute) ncomp++;
      if (compute && done) begin failures++; $display("FAIL compute and done together"); end
      @(negedge clk);
      if (done && tdone < 0) tdone = c;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nc, td;
    #1 nrst = 0;                // a real falling edge of the asynchronous reset
    #1;
    expect_eq(int'(compute), 0, "compute in reset");
    expect_eq(int'(done), 0, "done in reset");
    #10 nrst = 1;
    repeat (3) @(negedge clk);
    expect_eq(int'(compute), 0, "idle compute");
    expect_eq(int'(done), 0, "idle done");
    pulse_and_measure(nc, td);
    expect_eq(nc, ROUNDS, "compute cycles");
    expect_eq(td, ROUNDS, "done latency");
    expect_eq(int'(done), 1, "done held");
    // second run straight from DONE
    pulse_and_measure(nc, td);
    expect_eq(nc, ROUNDS, "compute cycles, second run");
    expect_eq(td, ROUNDS, "done latency, second run");
    // restart in the middle of a run
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (20) @(negedge clk);
    expect_eq(int'(compute), 1, "running before restart");
    pulse_and_measure(nc, td);
    expect_eq(nc, ROUNDS, "compute cycles after restart");
    expect_eq(td, ROUNDS, "done latency after restart");
    // reset from DONE
    nrst = 0; #1;
    expect_eq(int'(done), 0, "done cleared by reset");
    @(negedge clk) nrst = 1;
    repeat (3) @(negedge clk);
    expect_eq(int'(compute), 0, "idle after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
