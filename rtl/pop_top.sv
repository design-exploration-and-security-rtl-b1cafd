// pop_top: the PUF-on-PUF (POP) testchip core.
//
// A 64-bit challenge, written over JTAG, is loaded into the challenge
// register. One of six first-layer implementations - 64 APUFs of 2, 4, 6, 8,
// 12 or 24 stages each, wired to the challenge with wrap-around offsets - is
// evaluated; each of its 64 responses is filtered by a 24-bit TMV counter. For
// a multi-round evaluation the 64 majorities are written back into the
// challenge register and the first layer is evaluated again. After the last
// round the 64 majorities are the challenge of the single 64-stage APUF of the
// second layer, whose TMV majority is the POP response. 384 first-layer APUFs,
// one second-layer APUF and 65 TMV counters in all, as on the testchip.
//
// The first layers share the 64 first-layer TMV counters: only the selected
// layer receives the launch pulse and its responses are multiplexed onto the
// counters. A layer select of 6 or 7 fires no layer and reads zeros.
//
// Interface: the JTAG port (tck, tms, tdi, trst_n, tdo; register map in
// jtag_tap) carries configuration, challenge, start and results. The core
// runs on clk with synchronous reset rst_n; the start request crosses from
// TCK by a toggle and a two-flop synchroniser, done and busy cross back the
// same way, and the response bits are read only once done is seen, when they
// are stable. busy, done and response are also brought out as pins.
// CHIP_ID and NOISE_AMP belong to the behavioural APUF model: CHIP_ID picks
// the mismatch of one die, NOISE_AMP the evaluation noise.
module pop_top
  import pop_pkg::*;
#(
  parameter int unsigned CHIP_ID   = 0,
  parameter int unsigned NOISE_AMP = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tck,
  input  logic trst_n,
  input  logic tms,
  input  logic tdi,
  output logic tdo,
  output logic busy,
  output logic done,
  output logic response
);

  // ---- JTAG side -----------------------------------------------------------
  pop_cfg_t          cfg_jtag;
  logic [CHAL_W-1:0] chal_jtag;
  logic              start_tgl;
  logic              done_tck, busy_tck;
  logic [CHAL_W-1:0] l1_resp;

  jtag_tap u_tap (
    .tck        (tck),
    .trst_n     (trst_n),
    .tms        (tms),
    .tdi        (tdi),
    .tdo        (tdo),
    .cfg        (cfg_jtag),
    .chal       (chal_jtag),
    .start_tgl  (start_tgl),
    .st_l1_resp (l1_resp),
    .st_response(response),
    .st_done    (done_tck),
    .st_busy    (busy_tck)
  );

  sync_2ff u_sync_done (.clk(tck), .rst_n(trst_n), .d(done), .q(done_tck));
  sync_2ff u_sync_busy (.clk(tck), .rst_n(trst_n), .d(busy), .q(busy_tck));

  // ---- start request into the core clock -----------------------------------
  logic start_tgl_s, start_tgl_q, start;

  sync_2ff u_sync_start (.clk(clk), .rst_n(rst_n), .d(start_tgl), .q(start_tgl_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_tgl_q <= 1'b0;
    else        start_tgl_q <= start_tgl_s;
  end
  assign start = start_tgl_s ^ start_tgl_q;

  // ---- round control -------------------------------------------------------
  pop_cfg_t          cfg_q;
  logic              chal_load, chal_reload;
  logic              l1_en, l2_en, l1_clr, l1_sample, l2_clr, l2_sample;
  logic [CHAL_W-1:0] l1_maj;
  logic              l2_maj;

  round_ctrl u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .cfg        (cfg_jtag),
    .l1_maj     (l1_maj),
    .l2_maj     (l2_maj),
    .cfg_q      (cfg_q),
    .chal_load  (chal_load),
    .chal_reload(chal_reload),
    .l1_en      (l1_en),
    .l2_en      (l2_en),
    .l1_clr     (l1_clr),
    .l1_sample  (l1_sample),
    .l2_clr     (l2_clr),
    .l2_sample  (l2_sample),
    .l1_resp    (l1_resp),
    .response   (response),
    .busy       (busy),
    .done       (done)
  );

  // ---- challenge register --------------------------------------------------
  logic [CHAL_W-1:0] chal;

  challenge_register #(.W(CHAL_W)) u_chal (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (chal_load),
    .init_chal(chal_jtag),
    .reload   (chal_reload),
    .l1_resp  (l1_maj),
    .chal     (chal)
  );

  // ---- six first-layer implementations ------------------------------------
  logic [CHAL_W-1:0] l1_r [N_L1];
  logic [CHAL_W-1:0] l1_r_sel;

  for (genvar k = 0; k < N_L1; k++) begin : g_l1
    logic en_k;
    assign en_k = l1_en && (cfg_q.layer_sel == SEL_W'(k));
    pop_first_layer #(
      .N_STAGES (L1_STAGES[k]),
      .CHAL_W   (CHAL_W),
      .SEED_BASE(apuf_seed(CHIP_ID, k, 0)),
      .NOISE_AMP(NOISE_AMP)
    ) u_layer (
      .en(en_k),
      .c (chal),
      .r (l1_r[k])
    );
  end

  always_comb begin
    l1_r_sel = '0;
    for (int k = 0; k < N_L1; k++)
      if (cfg_q.layer_sel == SEL_W'(k)) l1_r_sel = l1_r[k];
  end

  // ---- 64 first-layer TMV counters ----------------------------------------
  for (genvar i = 0; i < CHAL_W; i++) begin : g_tmv1
    tmv_counter #(.CNT_W(TMV_CNT_W)) u_tmv (
      .clk   (clk),
      .rst_n (rst_n),
      .clr   (l1_clr),
      .sample(l1_sample),
      .r_in  (l1_r_sel[i]),
      .n     (cfg_q.tmv_n == '0 ? TMV_CNT_W'(1) : cfg_q.tmv_n),
      .count (),
      .maj   (l1_maj[i])
    );
  end

  // ---- second layer: one 64-APUF and its TMV counter ----------------------
  logic l2_r;

  apuf #(
    .N_STAGES (L2_STAGES),
    .SEED     (apuf_seed(CHIP_ID, N_L1, 0)),
    .NOISE_AMP(NOISE_AMP)
  ) u_l2 (
    .en(l2_en),
    .c (l1_resp),
    .r (l2_r)
  );

  tmv_counter #(.CNT_W(TMV_CNT_W)) u_tmv2 (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (l2_clr),
    .sample(l2_sample),
    .r_in  (l2_r),
    .n     (cfg_q.tmv_n == '0 ? TMV_CNT_W'(1) : cfg_q.tmv_n),
    .count (),
    .maj   (l2_maj)
  );

endmodule
