// pop_metrics_tb: the testchip's measurement sweeps, run on the model.
//
// Three cores receive the same JTAG commands: A (chip 0, noiseless; serves
// as the enrolled reference), B (chip 0 with evaluation noise) and C
// (chip 1, noiseless). For each first-layer size (2 to 24 stages) and TMV
// count (1, 7, 15, 31), K random challenges are evaluated with one round.
// Reported per size: uniformity of A, uniqueness A vs C, and the bit error
// rate of B against A for each TMV count. Then, for every size, the
// normalised Hamming distance between first-layer words of consecutive
// rounds for one challenge, and between the words of two random challenges
// after 1, 2, 4 and 8 rounds; and uniformity and uniqueness of the 2- and
// 8-stage cores for 1 to 4 rounds.
// Checked: every evaluation ends in the expected cycle count and A's
// responses match the reference model; overall uniformity and uniqueness
// lie between 0.3 and 0.7; voting over 31 evaluations gives no more errors
// than a single evaluation, summed over all sizes; every multi-round word
// equals the first-layer function of the previous round's word; and the
// 2-stage layer changes less from round 1 to round 2 than the 24-stage one.
// The noise of the behavioural model is not calibrated to silicon, so the
// error rates are the model's, not the chip's.
module pop_metrics_tb;
  import pop_pkg::*;
  import pop_ref_pkg::*;

  localparam int K = 100;
  localparam int K2 = 60;
  localparam int unsigned NAMP_B = 96;
  localparam int unsigned TMVS [4] = '{1, 7, 15, 31};

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, trst_n = 0;
  logic tck, tms, tdi;
  logic [2:0] tdo, busy, done, response;
  int busy_cyc;

  always #5 clk = ~clk;
  always @(posedge clk) if (busy[0]) busy_cyc++;

  jtag_host #(.NT(3)) host (.tck, .tms, .tdi, .tdo);

  pop_top #(.CHIP_ID(0), .NOISE_AMP(0)) dA (.clk, .rst_n, .tck, .trst_n, .tms, .tdi,
    .tdo(tdo[0]), .busy(busy[0]), .done(done[0]), .response(response[0]));
  pop_top #(.CHIP_ID(0), .NOISE_AMP(NAMP_B)) dB (.clk, .rst_n, .tck, .trst_n, .tms, .tdi,
    .tdo(tdo[1]), .busy(busy[1]), .done(done[1]), .response(response[1]));
  pop_top #(.CHIP_ID(1), .NOISE_AMP(0)) dC (.clk, .rst_n, .tck, .trst_n, .tms, .tdi,
    .tdo(tdo[2]), .busy(busy[2]), .done(done[2]), .response(response[2]));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One evaluation; returns the three RESULT words.
  task automatic eval3(int unsigned layer, int unsigned rounds, int unsigned n,
                       logic [63:0] chal, output logic [66:0] res [3]);
    logic [127:0] o [3];
    pop_cfg_t c;
    int polls = 0;
    c = '{layer_sel: 3'(layer), rounds: 4'(rounds), tmv_n: 24'(n)};
    host.ir(4'h2);
    host.dr(CFG_W, 128'(c), o);
    host.ir(4'h3);
    host.dr(64, 128'(chal), o);
    busy_cyc = 0;
    host.ir(4'h4);
    host.dr(1, 128'h0, o);
    host.ir(4'h5);
    do begin
      host.dr(67, 128'h0, o);
      polls++;
    end while (!(o[0][1] && o[1][1] && o[2][1]) && polls < 4000);
    for (int d = 0; d < 3; d++) res[d] = o[d][66:0];
    check("cycles", busy_cyc, 1 + (rounds + 1) * (2 * n + 2));
  endtask

  initial begin
    logic [66:0] res [3], res2 [3];
    logic [63:0] w, s;
    logic r, rs;
    int ones_all = 0, diff_all = 0, tot = 0;
    int err [4];
    real hd12_2, hd12_24;
    foreach (err[t]) err[t] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    trst_n = 1;
    host.tap_reset();
    $display("size  uniformity  uniqueness  BER@TMV1   BER@TMV7   BER@TMV15  BER@TMV31");
    for (int l = 0; l < 6; l++) begin
      int ones, diff;
      int e [4];
      ones = 0;
      diff = 0;
      foreach (e[t]) e[t] = 0;
      for (int k = 0; k < K; k++) begin
        logic [63:0] chal;
        chal = {$urandom, $urandom};
        for (int t = 0; t < 4; t++) begin
          eval3(l, 1, TMVS[t], chal, res);
          if (t == 0) begin
            l1_eval(0, l, chal, 0, w, s);
            l2_eval(0, w, 0, r, rs);
            check("A first layer", res[0][66:3], w);
            check("A response", res[0][2], r);
            ones += res[0][2];
            diff += int'(res[0][2] != res[2][2]);
          end
          e[t] += int'(res[0][2] != res[1][2]);
        end
      end
      $display("%4d  %10.3f  %10.3f  %9.3f  %9.3f  %9.3f  %9.3f", SIZES[l],
               real'(ones) / K, real'(diff) / K, real'(e[0]) / K, real'(e[1]) / K,
               real'(e[2]) / K, real'(e[3]) / K);
      ones_all += ones;
      diff_all += diff;
      tot += K;
      foreach (err[t]) err[t] += e[t];
    end
    checks += 3;
    if (ones_all * 10 < tot * 3 || ones_all * 10 > tot * 7) begin
      failures++; $display("FAIL uniformity %0d/%0d", ones_all, tot);
    end
    if (diff_all * 10 < tot * 3 || diff_all * 10 > tot * 7) begin
      failures++; $display("FAIL uniqueness %0d/%0d", diff_all, tot);
    end
    if (err[3] > err[0]) begin
      failures++; $display("FAIL TMV 31 gave more errors (%0d) than one evaluation (%0d)", err[3], err[0]);
    end
    // First-layer distance between consecutive rounds, same challenge:
    // the word of round r is the first-layer output of an r-round run.
    $display("size  distance (1,2)  (2,3)  (3,4)  (4,5) rounds, same challenge");
    for (int l = 0; l < 6; l++) begin
      int hd [4];
      foreach (hd[q]) hd[q] = 0;
      for (int k = 0; k < K2; k++) begin
        logic [63:0] chal, prev;
        chal = {$urandom, $urandom};
        for (int rr = 1; rr <= 5; rr++) begin
          eval3(l, rr, 1, chal, res);
          if (rr > 1) begin
            check("round r is first layer of round r-1", res[0][66:3], l1_eval_word(l, prev));
            hd[rr-2] += $countones(res[0][66:3] ^ prev);
          end
          prev = res[0][66:3];
        end
      end
      $display("%4d  %13.3f  %5.3f  %5.3f  %5.3f", SIZES[l], real'(hd[0]) / (64 * K2),
               real'(hd[1]) / (64 * K2), real'(hd[2]) / (64 * K2), real'(hd[3]) / (64 * K2));
      if (l == 0) hd12_2 = real'(hd[0]) / (64 * K2);
      if (l == 5) hd12_24 = real'(hd[0]) / (64 * K2);
    end
    // First-layer distance across challenges after 1, 2, 4 and 8 rounds.
    $display("size  distance across challenges after 1, 2, 4, 8 rounds");
    for (int l = 0; l < 6; l++) begin
      int hd [4];
      foreach (hd[q]) hd[q] = 0;
      for (int q = 0; q < 4; q++) begin
        int rr;
        rr = 1 << q;
        for (int k = 0; k < K2; k++) begin
          eval3(l, rr, 1, {$urandom, $urandom}, res);
          eval3(l, rr, 1, {$urandom, $urandom}, res2);
          hd[q] += $countones(res[0][66:3] ^ res2[0][66:3]);
        end
      end
      $display("%4d  %6.3f %6.3f %6.3f %6.3f", SIZES[l], real'(hd[0]) / (64 * K2),
               real'(hd[1]) / (64 * K2), real'(hd[2]) / (64 * K2), real'(hd[3]) / (64 * K2));
    end
    // Uniformity and uniqueness of the final response per round count.
    $display("size  rounds  uniformity  uniqueness");
    for (int li = 0; li < 2; li++) begin
      int l;
      l = (li == 0) ? 0 : 3;
      for (int rr = 1; rr <= 4; rr++) begin
        int ones, diff;
        ones = 0;
        diff = 0;
        for (int k = 0; k < K2; k++) begin
          eval3(l, rr, 1, {$urandom, $urandom}, res);
          ones += res[0][2];
          diff += int'(res[0][2] != res[2][2]);
        end
        $display("%4d  %6d  %10.3f  %10.3f", SIZES[l], rr, real'(ones) / K2, real'(diff) / K2);
      end
    end
    checks++;
    if (!(hd12_2 < hd12_24)) begin
      failures++;
      $display("FAIL round-to-round distance of 2-stage layer not below 24-stage layer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] l1_eval_word(int unsigned layer, logic [63:0] c);
    logic [63:0] w, s;
    l1_eval(0, layer, c, 0, w, s);
    return w;
  endfunction

endmodule
