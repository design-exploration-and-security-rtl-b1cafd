// pop_top_full_tb: one complete evaluation of the POP core at its default
// parameters (noisy behavioural APUFs), driven through JTAG.
//
// The challenge is written with the reset configuration left in place
// (8-stage first layer, one round, 15 TMV evaluations), START is issued and
// RESULT polled until done. Checked: the evaluation time (cycles with busy
// high, 1 + 2 * (2 * 15 + 2) = 65), the reset configuration read back, the
// first-layer bits whose reference margin exceeds the noise bound, and the
// final response when its own margin does. A second evaluation with the
// 24-stage first layer and four rounds follows.
module pop_top_full_tb;
  import pop_pkg::*;
  import pop_ref_pkg::*;

  localparam int unsigned NAMP = 32;   // the core's default noise amplitude

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, trst_n = 0;
  logic tck, tms, tdi, tdo, busy, done, response;
  int busy_cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (busy) busy_cyc++;

  jtag_host #(.NT(1)) host (.tck, .tms, .tdi, .tdo(tdo));
  pop_top dut (.clk, .rst_n, .tck, .trst_n, .tms, .tdi, .tdo, .busy, .done, .response);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic evaluate(int unsigned layer, int unsigned rounds, int unsigned n,
                          logic [63:0] chal);
    logic [127:0] o [1];
    logic [63:0] w, sure;
    logic r, rs, allsure;
    int polls = 0;
    host.ir(4'h3);
    host.dr(64, 128'(chal), o);
    busy_cyc = 0;
    host.ir(4'h4);
    host.dr(1, 128'h0, o);
    host.ir(4'h5);
    do begin
      host.dr(67, 128'h0, o);
      polls++;
    end while (!o[0][1] && polls < 2000);
    check("done", o[0][1], 1);
    check("evaluation cycles", busy_cyc, 1 + (rounds + 1) * (2 * n + 2));
    w = chal;
    allsure = 1;
    for (int k = 0; k < int'(rounds); k++) begin
      l1_eval(0, layer, w, NAMP, w, sure);
      if (k < int'(rounds) - 1 && sure != '1) allsure = 0;
    end
    if (allsure) begin
      check("first-layer bits beyond noise", o[0][66:3] & sure, w & sure);
      $display("first layer: %0d of 64 bits beyond the noise bound", $countones(sure));
    end
    l2_eval(0, o[0][66:3], NAMP, r, rs);
    if (rs) check("response", o[0][2], r);
    check("response pin", response, o[0][2]);
  endtask

  initial begin
    logic [127:0] o [1];
    pop_cfg_t c;
    repeat (4) @(negedge clk);
    rst_n = 1;
    trst_n = 1;
    host.tap_reset();
    host.ir(4'h2);
    host.dr(CFG_W, 128'(CFG_RESET), o);
    check("reset configuration", o[0][CFG_W-1:0], CFG_RESET);
    evaluate(3, 1, 15, 64'h0123_4567_89AB_CDEF);
    c = '{layer_sel: 3'd5, rounds: 4'd4, tmv_n: 24'd15};
    host.ir(4'h2);
    host.dr(CFG_W, 128'(c), o);
    evaluate(5, 4, 15, 64'hFEDC_BA98_7654_3210);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
