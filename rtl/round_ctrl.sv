// round_ctrl: the round and TMV sequencer of the POP core.
//
// One evaluation, started by a one-cycle `start`, runs:
//   LOAD            the challenge register takes the initial challenge;
//   rounds x        first-layer round:
//     L1_CLR          the 64 first-layer TMV counters are cleared,
//     tmv_n x         (L1_EN: en pulse to the selected first layer,
//                      L1_SMP: the counters sample the 64 responses),
//     L1_END          the 64 majorities are stored in l1_resp; if another
//                     round follows they are re-loaded into the challenge
//                     register (response i becomes challenge bit i);
//   L2_CLR, tmv_n x (L2_EN, L2_SMP), L2_END
//                   the same for the second-layer 64-APUF, whose challenge
//                   is l1_resp; its majority is the final response.
// The configuration is captured at start. rounds = 0 and tmv_n = 0 are taken
// as 1. From the clock edge that accepts start to the edge that sets done
// takes 1 + (rounds + 1) * (2 * tmv_n + 2) cycles.
//
// The sequence (reload the challenge register between rounds, then feed the
// second layer, TMV on every APUF) follows the POP architecture of the
// testchip; the state encoding, the two-cycle evaluation (one to launch, one
// to sample) and the handshake (start pulse, sticky done, busy) are this
// design's own. l1_en and l2_en come from flip-flops, so the APUFs see clean
// edges. done clears when the next evaluation starts.
module round_ctrl
  import pop_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pop_cfg_t          cfg,
  input  logic [CHAL_W-1:0] l1_maj,     // majorities of the first-layer TMVs
  input  logic              l2_maj,     // majority of the second-layer TMV
  output pop_cfg_t          cfg_q,      // configuration of the running evaluation
  output logic              chal_load,
  output logic              chal_reload,
  output logic              l1_en,      // launch pulse, selected first layer
  output logic              l2_en,      // launch pulse, second layer
  output logic              l1_clr,
  output logic              l1_sample,
  output logic              l2_clr,
  output logic              l2_sample,
  output logic [CHAL_W-1:0] l1_resp,    // first-layer responses of the last round
  output logic              response,   // final POP response
  output logic              busy,
  output logic              done
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD,
    S_L1_CLR, S_L1_EN, S_L1_SMP, S_L1_END,
    S_L2_CLR, S_L2_EN, S_L2_SMP, S_L2_END
  } state_t;

  state_t state, state_d;
  logic [TMV_CNT_W-1:0] ev_cnt;     // evaluations done in this TMV
  logic [ROUND_W-1:0]   round_cnt;  // first-layer rounds done
  logic [TMV_CNT_W-1:0] n_eff;
  logic [ROUND_W-1:0]   r_eff;

  always_comb begin
    n_eff = (cfg_q.tmv_n == '0) ? TMV_CNT_W'(1) : cfg_q.tmv_n;
    r_eff = (cfg_q.rounds == '0) ? ROUND_W'(1) : cfg_q.rounds;
  end

  always_comb begin
    state_d = state;
    unique case (state)
      S_IDLE:   if (start) state_d = S_LOAD;
      S_LOAD:   state_d = S_L1_CLR;
      S_L1_CLR: state_d = S_L1_EN;
      S_L1_EN:  state_d = S_L1_SMP;
      S_L1_SMP: state_d = (ev_cnt + 1'b1 == n_eff) ? S_L1_END : S_L1_EN;
      S_L1_END: state_d = (round_cnt + 1'b1 == r_eff) ? S_L2_CLR : S_L1_CLR;
      S_L2_CLR: state_d = S_L2_EN;
      S_L2_EN:  state_d = S_L2_SMP;
      S_L2_SMP: state_d = (ev_cnt + 1'b1 == n_eff) ? S_L2_END : S_L2_EN;
      S_L2_END: state_d = S_IDLE;
      default:  state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cfg_q     <= CFG_RESET;
      ev_cnt    <= '0;
      round_cnt <= '0;
      l1_resp   <= '0;
      response  <= 1'b0;
      done      <= 1'b0;
      l1_en     <= 1'b0;
      l2_en     <= 1'b0;
    end else begin
      state <= state_d;
      l1_en <= (state_d == S_L1_EN);
      l2_en <= (state_d == S_L2_EN);
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q     <= cfg;
          round_cnt <= '0;
          done      <= 1'b0;
        end
        S_L1_CLR, S_L2_CLR: ev_cnt <= '0;
        S_L1_SMP, S_L2_SMP: ev_cnt <= ev_cnt + 1'b1;
        S_L1_END: begin
          l1_resp   <= l1_maj;
          round_cnt <= round_cnt + 1'b1;
        end
        S_L2_END: begin
          response <= l2_maj;
          done     <= 1'b1;
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    chal_load   = (state == S_LOAD);
    chal_reload = (state == S_L1_END) && (state_d == S_L1_CLR);
    l1_clr      = (state == S_L1_CLR);
    l1_sample   = (state == S_L1_SMP);
    l2_clr      = (state == S_L2_CLR);
    l2_sample   = (state == S_L2_SMP);
    busy        = (state != S_IDLE);
  end

  // Exactly one launch pulse per sample, never both layers at once.
  a_one_layer: assert property (@(posedge clk) disable iff (!rst_n) !(l1_en && l2_en));
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 chal_load |-> !l1_en && !l2_en);

endmodule
