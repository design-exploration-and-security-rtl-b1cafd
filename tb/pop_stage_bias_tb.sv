// pop_stage_bias_tb: stage-bias analysis of single first-layer APUFs, with
// challenge/response pairs read out of the core through JTAG.
//
// Stage bias of stage j for challenge-bit value t is the fraction of
// challenges with c_j = t for which r = 1 xor p_j, where p_j is the parity of
// the challenge bits after stage j (c_{j+1} .. c_{n-1}); a value far from 0.5
// means that one bit has an unfair say in the response. The estimate keeps,
// per stage and bit value, a count of (r xor p_j) and a count of challenges.
//
// For the 2-, 4- and 8-stage first layers, APUF 0 (challenge bits 0..n-1)
// is enumerated over all 2^n challenges and its bias table printed. Then
// NC random challenges give the bias of all 64 instances of each of the
// 2-, 4-, 8- and 24-stage layers, whose spread (standard deviation over
// instances, stages and bit values) is printed. Every first-layer word read
// back is checked against the reference model; the spread must shrink from
// 2 to 24 stages. The core is noiseless and uses single evaluations.
module pop_stage_bias_tb;
  import pop_pkg::*;
  import pop_ref_pkg::*;

  localparam int NC = 800;
  localparam int unsigned LAYERS [4] = '{0, 1, 3, 5};   // 2, 4, 8, 24 stages

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, trst_n = 0;
  logic tck, tms, tdi, tdo, busy, done, response;

  always #5 clk = ~clk;

  jtag_host #(.NT(1)) host (.tck, .tms, .tdi, .tdo(tdo));
  pop_top #(.CHIP_ID(3), .NOISE_AMP(0)) dut (.clk, .rst_n, .tck, .trst_n, .tms, .tdi, .tdo,
                                             .busy, .done, .response);

  initial begin
    #500ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic configure(int unsigned layer);
    logic [127:0] o [1];
    pop_cfg_t c;
    c = '{layer_sel: 3'(layer), rounds: 4'd1, tmv_n: 24'd1};
    host.ir(4'h2);
    host.dr(CFG_W, 128'(c), o);
  endtask

  // One evaluation; returns the first-layer word and checks it.
  task automatic eval_l1(int unsigned layer, logic [63:0] chal, output logic [63:0] w);
    logic [127:0] o [1];
    logic [63:0] rw, s;
    int polls = 0;
    host.ir(4'h3);
    host.dr(64, 128'(chal), o);
    host.ir(4'h4);
    host.dr(1, 128'h0, o);
    host.ir(4'h5);
    do begin
      host.dr(67, 128'h0, o);
      polls++;
    end while (!o[0][1] && polls < 1000);
    w = o[0][66:3];
    l1_eval(3, layer, chal, 0, rw, s);
    checks++;
    if (w !== rw) begin
      failures++;
      if (failures < 10) $display("FAIL first-layer word for %016h", chal);
    end
  endtask

  // Accumulate (r xor p_j) and counts for APUF i of an n-stage layer.
  function automatic void accumulate(int n, int i, logic [63:0] chal, logic r,
                                     ref int y [64][2][24], ref int cnt [64][2][24]);
    logic p = 1'b0;
    logic [23:0] ci;
    for (int k = 0; k < n; k++) ci[k] = chal[(i + k) % 64];
    for (int k = 0; k < n; k++) p ^= ci[k];
    for (int j = 0; j < n; j++) begin
      p ^= ci[j];
      y[i][ci[j]][j] += int'(r ^ p);
      cnt[i][ci[j]][j]++;
    end
  endfunction

  initial begin
    int y [64][2][24];
    int cnt [64][2][24];
    real sd [4];
    logic [63:0] w;
    repeat (4) @(negedge clk);
    rst_n = 1;
    trst_n = 1;
    host.tap_reset();
    // Enumeration of APUF 0.
    for (int li = 0; li < 3; li++) begin
      int unsigned l;
      int n;
      l = LAYERS[li];
      n = int'(SIZES[l]);
      foreach (y[a, b, c]) begin y[a][b][c] = 0; cnt[a][b][c] = 0; end
      configure(l);
      for (bit [31:0] v = 0; v < (1 << n); v++) begin
        logic [63:0] chal;
        chal = {$urandom, $urandom};
        for (int k = 0; k < n; k++) chal[k] = v[k];
        eval_l1(l, chal, w);
        accumulate(n, 0, chal, w[0], y, cnt);
      end
      $display("%0d-APUF instance 0, all %0d challenges: stage bias for c_j = 0 / c_j = 1",
               n, 1 << n);
      for (int j = 0; j < n; j++)
        $display("  stage %0d: %5.2f / %5.2f", j, real'(y[0][0][j]) / cnt[0][0][j],
                 real'(y[0][1][j]) / cnt[0][1][j]);
    end
    // Spread over all 64 instances, random challenges.
    for (int li = 0; li < 4; li++) begin
      int unsigned l;
      int n;
      real s1, s2;
      int m;
      l = LAYERS[li];
      n = int'(SIZES[l]);
      foreach (y[a, b, c]) begin y[a][b][c] = 0; cnt[a][b][c] = 0; end
      configure(l);
      for (int t = 0; t < NC; t++) begin
        logic [63:0] chal;
        chal = {$urandom, $urandom};
        eval_l1(l, chal, w);
        for (int i = 0; i < 64; i++) accumulate(n, i, chal, w[i], y, cnt);
      end
      s1 = 0; s2 = 0; m = 0;
      for (int i = 0; i < 64; i++)
        for (int b = 0; b < 2; b++)
          for (int j = 0; j < n; j++) if (cnt[i][b][j] > 0) begin
            real v;
            v = real'(y[i][b][j]) / cnt[i][b][j];
            s1 += v;
            s2 += v * v;
            m++;
          end
      sd[li] = $sqrt(s2 / m - (s1 / m) * (s1 / m));
      $display("%2d-APUF: mean stage bias %4.2f, standard deviation %4.2f (64 instances, %0d CRPs)",
               n, s1 / m, sd[li], NC);
    end
    checks++;
    if (!(sd[0] > sd[3])) begin
      failures++;
      $display("FAIL stage-bias spread does not shrink with APUF size");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
