// pop_top_tb: end-to-end testbench of the POP core, driven only through JTAG.
//
// Three cores share clock, reset and the JTAG input lines and receive the
// same commands: A (chip 0, no noise), B (chip 0, evaluation noise) and C
// (chip 1, no noise, i.e. another die). Each operation writes CONFIG,
// CHALLENGE and START, then polls RESULT until done. Checked against the
// reference model: A's and C's first-layer words and final responses for
// every first-layer size and for 1 to 8 rounds; B's responses wherever the
// reference margin exceeds the noise bound; the evaluation time, counted
// as clock cycles with busy high, 1 + (R + 1)(2N + 2). Counted mechanisms,
// each of which must occur: each of the six first layers, a multi-round
// evaluation (challenge reload), TMV with more than one evaluation, and a
// TMV vote that overruled a minority in B. A and C must differ in about
// half their first-layer bits (uniqueness).
module pop_top_tb;
  import pop_pkg::*;
  import pop_ref_pkg::*;

  localparam int unsigned NAMP_B = 64;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, trst_n = 0;
  logic tck, tms, tdi;
  logic [2:0] tdo, busy, done, response;

  always #5 clk = ~clk;

  jtag_host #(.NT(3)) host (.tck, .tms, .tdi, .tdo);

  pop_top #(.CHIP_ID(0), .NOISE_AMP(0)) dA (.clk, .rst_n, .tck, .trst_n, .tms, .tdi,
    .tdo(tdo[0]), .busy(busy[0]), .done(done[0]), .response(response[0]));
  pop_top #(.CHIP_ID(0), .NOISE_AMP(NAMP_B)) dB (.clk, .rst_n, .tck, .trst_n, .tms, .tdi,
    .tdo(tdo[1]), .busy(busy[1]), .done(done[1]), .response(response[1]));
  pop_top #(.CHIP_ID(1), .NOISE_AMP(0)) dC (.clk, .rst_n, .tck, .trst_n, .tms, .tdi,
    .tdo(tdo[2]), .busy(busy[2]), .done(done[2]), .response(response[2]));

  // Evaluation time per core: cycles with busy high.
  int busy_cyc [3];
  always @(posedge clk) for (int d = 0; d < 3; d++) if (busy[d]) busy_cyc[d]++;

  // TMV counts of B's first layer, to see votes that were not unanimous.
  logic [23:0] cntB [64];
  for (genvar i = 0; i < 64; i++) begin : g_peek
    assign cntB[i] = dB.g_tmv1[i].u_tmv.count;
  end

  int n_layer [6];
  int n_multi = 0, n_tmv = 0, n_vote = 0, n_b_checked = 0, n_b_skipped = 0;
  int hd_sum = 0, hd_bits = 0, resp_diff = 0, n_ops = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic op(int unsigned layer, int unsigned rounds, int unsigned n, logic [63:0] chal);
    logic [127:0] o [3];
    pop_cfg_t c;
    logic [63:0] w, sure, wB, sB, l1 [3];
    logic r, rs, allsure;
    int polls;
    int unsigned exp_cyc, re, ne;
    re = (rounds == 0) ? 1 : rounds;   // 0 is taken as 1
    ne = (n == 0) ? 1 : n;
    c = '{layer_sel: 3'(layer), rounds: 4'(rounds), tmv_n: 24'(n)};
    host.ir(4'h2);
    host.dr(CFG_W, 128'(c), o);
    host.ir(4'h3);
    host.dr(64, 128'(chal), o);
    foreach (busy_cyc[d]) busy_cyc[d] = 0;
    host.ir(4'h4);
    host.dr(1, 128'h0, o);
    host.ir(4'h5);
    polls = 0;
    do begin
      host.dr(67, 128'h0, o);
      polls++;
    end while (!(o[0][1] && o[1][1] && o[2][1]) && polls < 2000);
    for (int d = 0; d < 3; d++) l1[d] = o[d][66:3];
    exp_cyc = 1 + (re + 1) * (2 * ne + 2);
    for (int d = 0; d < 3; d++) check($sformatf("busy cycles dev%0d", d), busy_cyc[d], exp_cyc);
    // A and C: exact.
    for (int d = 0; d < 3; d += 2) begin
      int unsigned chip = (d == 0) ? 0 : 1;
      w = chal;
      for (int k = 0; k < int'(re); k++) l1_eval(chip, layer, w, 0, w, sure);
      check($sformatf("dev%0d l1 L%0d R%0d N%0d", d, layer, rounds, n), l1[d], w);
      l2_eval(chip, l1[d], 0, r, rs);
      check($sformatf("dev%0d response", d), o[d][2], r);
      check($sformatf("dev%0d response pin", d), response[d], r);
    end
    // B: only where the outcome is certain.
    wB = chal;
    allsure = 1;
    for (int k = 0; k < int'(re); k++) begin
      l1_eval(0, layer, wB, NAMP_B, wB, sB);
      if (k < int'(re) - 1 && sB != '1) allsure = 0;
    end
    if (allsure) begin
      n_b_checked++;
      check("devB l1 sure bits", l1[1] & sB, wB & sB);
      l2_eval(0, l1[1], NAMP_B, r, rs);
      if (rs) check("devB response", o[1][2], r);
    end else n_b_skipped++;
    for (int i = 0; i < 64; i++) if (cntB[i] != 0 && cntB[i] != ne) n_vote++;
    hd_sum += $countones(l1[0] ^ l1[2]);
    hd_bits += 64;
    resp_diff += int'(o[0][2] != o[2][2]);
    n_layer[layer]++;
    if (rounds > 1) n_multi++;
    if (n > 1) n_tmv++;
    n_ops++;
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    trst_n = 1;
    host.tap_reset();
    for (int l = 0; l < 6; l++) begin
      op(l, 1, 15, {$urandom, $urandom});
      op(l, 2, 7, {$urandom, $urandom});
    end
    op(0, 4, 3, {$urandom, $urandom});
    op(5, 4, 3, {$urandom, $urandom});
    op(0, 8, 1, {$urandom, $urandom});
    op(3, 3, 31, {$urandom, $urandom});
    op(1, 0, 0, {$urandom, $urandom});
    $display("ops=%0d multi-round=%0d tmv>1=%0d split votes in B=%0d B checked=%0d skipped=%0d",
             n_ops, n_multi, n_tmv, n_vote, n_b_checked, n_b_skipped);
    $display("first-layer distance between chips: %0d/%0d", hd_sum, hd_bits);
    for (int l = 0; l < 6; l++) begin
      checks++;
      if (n_layer[l] == 0) begin failures++; $display("FAIL layer %0d never used", l); end
    end
    checks += 4;
    if (n_multi == 0) begin failures++; $display("FAIL no multi-round evaluation"); end
    if (n_tmv == 0)   begin failures++; $display("FAIL no TMV with n > 1"); end
    if (n_vote == 0)  begin failures++; $display("FAIL no split TMV vote"); end
    if (n_b_checked == 0) begin failures++; $display("FAIL noisy core never checked"); end
    checks++;
    if (hd_sum * 10 < hd_bits * 3 || hd_sum * 10 > hd_bits * 7) begin
      failures++;
      $display("FAIL chips not unique");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
