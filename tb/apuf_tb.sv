// apuf_tb: self-checking testbench of the behavioural arbiter PUF model.
//
// The reference computes the response with the additive delay model: the
// final delay difference is a sum of per-stage terms, each signed by the
// parity of the challenge bits between that stage and the arbiter. It uses
// its own copy of the mismatch generator and never traces the two paths, so
// it is independent of the model's stage-by-stage race. Checked: all 256
// challenges of a noiseless 8-stage APUF, 300 random challenges of a
// noiseless 64-stage APUF, and, for a noisy 64-stage APUF, that every
// challenge with margin beyond the noise bound gives the reference response
// while some challenge inside it changes between evaluations.
module apuf_tb;

  localparam int NOMINAL = 10000;
  localparam int unsigned NAMP = 256;

  int checks = 0, failures = 0;

  function automatic int unsigned h32(int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7FEB352D;
    x = x ^ (x >> 15);
    x = x * 32'h846CA68B;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic int dly(int unsigned seed, int unsigned stage, int unsigned k);
    int unsigned h;
    h = h32(seed * 32'h9E3779B9 ^ h32(stage * 4 + k + 32'h1234));
    return NOMINAL + int'(h[7:0]) + int'(h[15:8]) + int'(h[23:16]) + int'(h[31:24]) - 510;
  endfunction

  // Additive model: delta = sum_i s_i * k_i, s_i = (-1)^(parity of c[i+1..n-1]),
  // k_i = d(bottom->bottom) - d(top->top) for c_i = 0,
  //       d(top->bottom) - d(bottom->top) for c_i = 1.
  function automatic int ref_delta(int unsigned seed, int n, logic [63:0] c);
    int sum = 0;
    for (int i = 0; i < n; i++) begin
      logic p = 1'b0;
      int k;
      for (int j = i + 1; j < n; j++) p ^= c[j];
      k = c[i] ? dly(seed, i, 3) - dly(seed, i, 2) : dly(seed, i, 1) - dly(seed, i, 0);
      sum += p ? -k : k;
    end
    return sum;
  endfunction

  logic        en8 = 0, en64 = 0, enn = 0;
  logic [7:0]  c8;
  logic [63:0] c64, cn;
  logic        r8, r64, rn;

  apuf #(.N_STAGES(8),  .SEED(77),  .NOISE_AMP(0))    u8  (.en(en8),  .c(c8),  .r(r8));
  apuf #(.N_STAGES(64), .SEED(901), .NOISE_AMP(0))    u64 (.en(en64), .c(c64), .r(r64));
  apuf #(.N_STAGES(64), .SEED(5),   .NOISE_AMP(NAMP)) un  (.en(enn),  .c(cn),  .r(rn));

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones, bound, flips, near;
    ones = 0;
    c8 = '0; c64 = '0; cn = '0;
    #1;
    for (int v = 0; v < 256; v++) begin
      c8 = 8'(v); #1 en8 = 1; #1 en8 = 0;
      check($sformatf("8-APUF c=%02h", v), r8, ref_delta(77, 8, 64'(c8)) > 0);
      ones += r8;
    end
    for (int t = 0; t < 300; t++) begin
      c64 = {$urandom, $urandom}; #1 en64 = 1; #1 en64 = 0;
      check($sformatf("64-APUF c=%016h", c64), r64, ref_delta(901, 64, c64) > 0);
    end
    // A response held between edges: changing c alone does not change r.
    begin
      logic held;
      held = r64;
      c64 = ~c64; #1;
      check("hold without en edge", r64, held);
    end
    // Noisy instance.
    bound = (510 * int'(NAMP)) / 256;
    flips = 0; near = 0;
    for (int t = 0; t < 2000; t++) begin
      int d;
      logic first;
      cn = {$urandom, $urandom};
      d = ref_delta(5, 64, cn);
      #1 enn = 1; #1 enn = 0; first = rn;
      #1 enn = 1; #1 enn = 0;
      if (d > bound || d < -bound) begin
        check("noisy, beyond bound", rn, d > 0);
        check("noisy, repeat", first, d > 0);
      end else begin
        near++;
        if (first != rn) flips++;
      end
    end
    $display("noisy APUF: %0d challenges inside noise bound, %0d changed", near, flips);
    checks++;
    if (flips == 0) begin failures++; $display("FAIL noise never changed a response"); end
    // Sanity of the mismatch spread: the 8-APUF is not constant.
    checks++;
    if (ones == 0 || ones == 256) begin failures++; $display("FAIL 8-APUF constant"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
