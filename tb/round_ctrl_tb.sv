// round_ctrl_tb: self-checking testbench of the round and TMV sequencer.
//
// For a set of (rounds, tmv_n) settings, including 0 for either (taken as
// 1), the testbench starts one evaluation and counts, independently of the
// sequencer, the launch pulses per layer, the samples, the clears, the
// challenge loads and reloads, and the cycles from start to done, which must
// be 1 + (R + 1) * (2 N + 2). The first-layer majorities are a new random
// word after every clear; l1_resp must end as the last round's word and the
// response as the second-layer majority. A configuration change while busy
// must not affect the running evaluation.
module round_ctrl_tb;
  import pop_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  pop_cfg_t cfg, cfg_q;
  logic [63:0] l1_maj = '0, l1_resp;
  logic l2_maj = 0;
  logic chal_load, chal_reload, l1_en, l2_en, l1_clr, l1_sample, l2_clr, l2_sample;
  logic response, busy, done;

  always #5 clk = ~clk;

  round_ctrl dut (.*);

  int n_l1en, n_l2en, n_l1s, n_l2s, n_l1c, n_l2c, n_load, n_reload, n_badreload;
  logic [63:0] last_word;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitors, sampled at each rising edge.
  always @(posedge clk) if (rst_n) begin
    if (l1_en) n_l1en++;
    if (l2_en) n_l2en++;
    if (l1_sample) begin
      n_l1s++;
      if (!$past(l1_en)) begin failures++; $display("FAIL l1 sample without launch"); end
    end
    if (l2_sample) begin
      n_l2s++;
      if (!$past(l2_en)) begin failures++; $display("FAIL l2 sample without launch"); end
    end
    if (l1_clr) n_l1c++;
    if (l2_clr) n_l2c++;
    if (chal_load) n_load++;
    if (chal_reload) begin
      n_reload++;
      if (l1_maj !== last_word) n_badreload++;
    end
  end

  // New first-layer word after every clear.
  always @(posedge clk) if (l1_clr) begin
    l1_maj    <= {$urandom, $urandom};
    last_word <= 'x;
  end
  always @(negedge clk) last_word = l1_maj;

  task automatic run(int unsigned rr, int unsigned nn);
    int cyc;
    int unsigned re, ne;
    logic l2v;
    re = (rr == 0) ? 1 : rr;
    ne = (nn == 0) ? 1 : nn;
    n_l1en = 0; n_l2en = 0; n_l1s = 0; n_l2s = 0; n_l1c = 0; n_l2c = 0;
    n_load = 0; n_reload = 0; n_badreload = 0;
    l2v = 1'($urandom);
    l2_maj = l2v;
    cfg = '{layer_sel: 3'(rr % 6), rounds: 4'(rr), tmv_n: 24'(nn)};
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cfg = '{layer_sel: 3'd7, rounds: 4'd9, tmv_n: 24'd3};   // ignored while busy
    check("cfg captured", cfg_q.tmv_n, nn);
    cyc = 0;   // edges after the one that accepted start
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 100000) break;
    end
    check($sformatf("cycles R=%0d N=%0d", rr, nn), cyc, 1 + (re + 1) * (2 * ne + 2));
    check("l1 launches", n_l1en, re * ne);
    check("l2 launches", n_l2en, ne);
    check("l1 samples", n_l1s, re * ne);
    check("l2 samples", n_l2s, ne);
    check("l1 clears", n_l1c, re);
    check("l2 clears", n_l2c, 1);
    check("loads", n_load, 1);
    check("reloads", n_reload, re - 1);
    check("reload takes majorities", n_badreload, 0);
    check("l1_resp is last round", l1_resp == l1_maj, 1);
    check("response", response, l2v);
    check("busy low at done", busy, 0);
    repeat (3) @(negedge clk);
    check("done sticky", done, 1);
  endtask

  initial begin
    cfg = CFG_RESET;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("idle after reset", busy, 0);
    check("done low after reset", done, 0);
    run(1, 15);
    run(2, 7);
    run(4, 1);
    run(8, 3);
    run(3, 31);
    run(0, 0);
    run(15, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
