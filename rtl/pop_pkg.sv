// pop_pkg: constants and types shared by the PUF-on-PUF (POP) core.
//
// The core is a two-layer composite strong PUF. A 64-bit challenge feeds a
// first layer of 64 arbiter PUFs (APUFs); their 64 responses form the
// challenge of a single 64-stage APUF in the second layer. The first layer
// may be evaluated several times ("rounds"), its responses re-loaded as the
// next challenge, before the second layer is evaluated. Every APUF response
// is filtered by temporal majority voting (TMV).
//
// The challenge width (64), the six first-layer APUF sizes (2, 4, 6, 8, 12,
// 24), the second-layer size (64) and the 24-bit TMV counters are taken from
// the testchip description. Field widths of the run configuration (round
// count, layer select) and the reset defaults are this design's own choices.
package pop_pkg;

  localparam int unsigned CHAL_W     = 64;  // challenge bits = first-layer APUFs
  localparam int unsigned N_L1       = 6;   // first-layer implementations
  localparam int unsigned L2_STAGES  = 64;  // second-layer APUF size
  localparam int unsigned TMV_CNT_W  = 24;  // TMV counter width
  localparam int unsigned ROUND_W    = 4;   // round-count field (own choice)
  localparam int unsigned SEL_W      = 3;   // layer-select field (own choice)

  // Stage count of first-layer implementation k (k = 0..5).
  localparam int unsigned L1_STAGES [N_L1] = '{2, 4, 6, 8, 12, 24};

  // Run configuration, written over JTAG while the core is idle.
  typedef struct packed {
    logic [SEL_W-1:0]     layer_sel;  // 0..5 selects the 2..24-APUF first layer
    logic [ROUND_W-1:0]   rounds;     // first-layer rounds, 0 is taken as 1
    logic [TMV_CNT_W-1:0] tmv_n;      // repeated evaluations per TMV, 0 is taken as 1
  } pop_cfg_t;

  localparam int unsigned CFG_W = $bits(pop_cfg_t);

  // Reset configuration: 8-APUF first layer, one round, 15 TMV evaluations.
  localparam pop_cfg_t CFG_RESET = '{layer_sel: 3'd3, rounds: 4'd1, tmv_n: 24'd15};

  // Seed of the behavioural APUF model: one value per instance and chip.
  // Layer 0..5 are the first layers, layer 6 the second-layer APUF.
  function automatic int unsigned apuf_seed(int unsigned chip, int unsigned layer,
                                            int unsigned idx);
    return (chip << 16) + (layer << 8) + idx + 1;
  endfunction

endpackage
