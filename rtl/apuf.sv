// apuf: behavioural model of the custom-layout arbiter PUF (not synthesizable
// logic: the real cell is a hand-drawn delay chain whose function comes from
// transistor mismatch).
//
// Structure: N_STAGES delay stages, each of four tri-state inverters, then a
// NAND-latch arbiter. A rising edge on `en` enters both paths of stage 0.
// Challenge bit c[i] selects, in stage i, either the straight pair of
// inverters (top->top, bottom->bottom) or the crossed pair (top->bottom,
// bottom->top). The arbiter reports which path's edge arrived first:
// r = 1 when the top path wins.
//
// The model computes the two arrival times stage by stage. Each of the four
// inverter delays of every stage is a fixed nominal delay plus a mismatch term
// that is a pseudo-normal integer (sum of four hash bytes, spread about 148
// units) drawn from SEED, so each SEED is one manufactured instance. At each
// evaluation a bounded pseudo-normal noise term, scaled by NOISE_AMP/256, is
// added to the final delay difference; it never exceeds 510*NOISE_AMP/256,
// so a challenge whose margin is larger always gives the same response.
//
// Interface and timing: r is updated at each rising edge of en and holds its
// value until the next one; no clock. Which inverter pair is straight (c=0)
// and the polarity of r are this model's choices; the delay units are
// arbitrary.
module apuf #(
  parameter int unsigned N_STAGES  = 64,
  parameter int unsigned SEED      = 1,
  parameter int unsigned NOISE_AMP = 32
) (
  input  logic                en,
  input  logic [N_STAGES-1:0] c,
  output logic                r
);

  localparam int NOMINAL = 10000;  // nominal inverter delay, arbitrary units

  function automatic int unsigned mix32(int unsigned x);
    x = x ^ (x >> 16);
    x = x * 32'h7FEB352D;
    x = x ^ (x >> 15);
    x = x * 32'h846CA68B;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Pseudo-normal value in [-510, 510] from a 32-bit word.
  function automatic int gauss4(int unsigned h);
    return int'(h[7:0]) + int'(h[15:8]) + int'(h[23:16]) + int'(h[31:24]) - 510;
  endfunction

  // Delay of inverter k of stage i: k=0 top->top, 1 bottom->bottom,
  // 2 bottom->top, 3 top->bottom.
  function automatic int inv_delay(int unsigned stage, int unsigned k);
    int unsigned h;
    h = mix32(SEED * 32'h9E3779B9 ^ mix32(stage * 4 + k + 32'h1234));
    return NOMINAL + gauss4(h);
  endfunction

  // Bottom arrival time minus top arrival time for challenge ch.
  function automatic int race(logic [N_STAGES-1:0] ch);
    int t, b, t_n, b_n;
    t = 0;
    b = 0;
    for (int unsigned i = 0; i < N_STAGES; i++) begin
      if (!ch[i]) begin
        t_n = t + inv_delay(i, 0);
        b_n = b + inv_delay(i, 1);
      end else begin
        t_n = b + inv_delay(i, 2);
        b_n = t + inv_delay(i, 3);
      end
      t = t_n;
      b = b_n;
    end
    return b - t;
  endfunction

  always @(posedge en) begin
    int noise;
    noise = (gauss4($urandom) * int'(NOISE_AMP)) / 256;
    r <= (race(c) + noise) > 0;
  end

endmodule
