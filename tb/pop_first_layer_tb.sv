// pop_first_layer_tb: self-checking testbench of a first-layer implementation.
//
// Two noiseless 64-APUF layers, of 4 and of 24 stages. For random challenges
// the reference gathers, for every APUF i, the challenge bits i..i+n-1
// (wrapping past bit 63) and evaluates a stand-alone APUF of its own with the
// same seed, so a wrong wiring offset, order or wrap shows up as a mismatch.
// Also checks that no APUF changes without an en edge.
module pop_first_layer_tb;

  int checks = 0, failures = 0;
  localparam int unsigned SB4 = 100, SB24 = 900;

  logic        en = 0, ref_en = 0;
  logic [63:0] c, r4, r24;

  pop_first_layer #(.N_STAGES(4),  .SEED_BASE(SB4),  .NOISE_AMP(0)) u4  (.en, .c, .r(r4));
  pop_first_layer #(.N_STAGES(24), .SEED_BASE(SB24), .NOISE_AMP(0)) u24 (.en, .c, .r(r24));

  // Reference APUFs, each driven by a challenge slice gathered here.
  logic [3:0]  rc4  [64];
  logic [23:0] rc24 [64];
  logic [63:0] rr4, rr24;

  for (genvar i = 0; i < 64; i++) begin : g_ref
    apuf #(.N_STAGES(4),  .SEED(SB4 + i),  .NOISE_AMP(0)) a4  (.en(ref_en), .c(rc4[i]),  .r(rr4[i]));
    apuf #(.N_STAGES(24), .SEED(SB24 + i), .NOISE_AMP(0)) a24 (.en(ref_en), .c(rc24[i]), .r(rr24[i]));
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] held;
    c = '0;
    for (int t = 0; t < 200; t++) begin
      c = (t == 0) ? 64'h1 : {$urandom, $urandom};
      for (int i = 0; i < 64; i++) begin
        for (int k = 0; k < 4; k++)  rc4[i][k]  = c[(i + k) % 64];
        for (int k = 0; k < 24; k++) rc24[i][k] = c[(i + k) % 64];
      end
      #1 en = 1; ref_en = 1;
      #1 en = 0; ref_en = 0;
      #1;
      for (int i = 0; i < 64; i++) begin
        checks += 2;
        if (r4[i] !== rr4[i]) begin
          failures++;
          if (failures < 10) $display("FAIL 4-APUF_%0d c=%016h", i, c);
        end
        if (r24[i] !== rr24[i]) begin
          failures++;
          if (failures < 10) $display("FAIL 24-APUF_%0d c=%016h", i, c);
        end
      end
    end
    held = r4;
    c = ~c;
    #1;
    checks++;
    if (r4 !== held) begin failures++; $display("FAIL response changed without en"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
