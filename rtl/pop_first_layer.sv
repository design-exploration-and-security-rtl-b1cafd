// pop_first_layer: one first-layer implementation of the POP core.
//
// CHAL_W arbiter PUFs, all of N_STAGES stages. APUF i reads the challenge at
// offset i: its stage k is driven by challenge bit (i + k) mod CHAL_W, so the
// bits wrap around past the last one and every challenge bit feeds N_STAGES
// different APUFs (the wiring that defeats the cryptanalysis attack on
// composite PUFs). Response bit i is APUF i's arbiter output.
//
// Each APUF gets its own seed, SEED_BASE + i, and so its own mismatch. All
// APUFs fire together on the rising edge of en; r holds until the next one.
module pop_first_layer #(
  parameter int unsigned N_STAGES  = 4,
  parameter int unsigned CHAL_W    = 64,
  parameter int unsigned SEED_BASE = 1,
  parameter int unsigned NOISE_AMP = 32
) (
  input  logic              en,
  input  logic [CHAL_W-1:0] c,
  output logic [CHAL_W-1:0] r
);

  for (genvar i = 0; i < CHAL_W; i++) begin : g_apuf
    logic [N_STAGES-1:0] ci;
    for (genvar k = 0; k < N_STAGES; k++) begin : g_wire
      assign ci[k] = c[(i + k) % CHAL_W];
    end
    apuf #(
      .N_STAGES (N_STAGES),
      .SEED     (SEED_BASE + i),
      .NOISE_AMP(NOISE_AMP)
    ) u_apuf (
      .en(en),
      .c (ci),
      .r (r[i])
    );
  end

endmodule
