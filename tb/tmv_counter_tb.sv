// tmv_counter_tb: self-checking testbench of the TMV counter.
//
// Drives random response sequences of length n (1, 7, 15, 31 and random
// lengths) and compares the count and the majority with a count kept here.
// Also checks the tie rule for even n, clear priority over sample,
// saturation of a narrow counter and that maj is valid one cycle after the
// last sample.
module tmv_counter_tb;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, sample = 0, r_in = 0;
  logic [23:0] n = 24'd15, count;
  logic        maj;
  logic        clr3 = 0, sample3 = 0, r3 = 0;
  logic [2:0]  n3 = 3'd7, count3;
  logic        maj3;

  always #5 clk = ~clk;

  tmv_counter #(.CNT_W(24)) dut (.clk, .rst_n, .clr, .sample, .r_in, .n, .count, .maj);
  tmv_counter #(.CNT_W(3)) dut3 (.clk, .rst_n, .clr(clr3), .sample(sample3), .r_in(r3),
                                 .n(n3), .count(count3), .maj(maj3));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tmv(int unsigned nn, int unsigned p1);
    int ones = 0;
    n = 24'(nn);
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int unsigned e = 0; e < nn; e++) begin
      sample = 1;
      r_in = ($urandom % 100) < p1;
      ones += r_in;
      @(negedge clk);
    end
    sample = 0;
    // The last sample was taken at the edge just before this negedge.
    check($sformatf("count n=%0d", nn), count, ones);
    check($sformatf("maj n=%0d ones=%0d", nn, ones), maj, (2 * ones > nn));
  endtask

  initial begin
    int unsigned sizes [4] = '{1, 7, 15, 31};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset count", count, 0);
    foreach (sizes[s])
      for (int t = 0; t < 40; t++) run_tmv(sizes[s], $urandom % 101);
    for (int t = 0; t < 40; t++) run_tmv(1 + $urandom % 200, $urandom % 101);
    // Tie: n = 4, two ones.
    n = 24'd4;
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0; sample = 1; r_in = 1;
    @(negedge clk) r_in = 0;
    @(negedge clk) r_in = 1;
    @(negedge clk) r_in = 0;
    @(negedge clk) sample = 0;
    check("tie count", count, 2);
    check("tie reads 0", maj, 0);
    // Clear wins over sample.
    @(negedge clk) clr = 1; sample = 1; r_in = 1;
    @(negedge clk) clr = 0; sample = 0;
    check("clear priority", count, 0);
    // Saturation of the 3-bit counter.
    @(negedge clk) clr3 = 1;
    @(negedge clk) clr3 = 0; sample3 = 1; r3 = 1;
    repeat (10) @(negedge clk);
    sample3 = 0;
    check("saturate", count3, 7);
    check("saturated maj", maj3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
