// pop_ref_pkg: reference model of the POP core for the testbenches.
//
// Computes the arbiter PUF delay difference with the additive model (a sum
// of per-stage delay differences, each signed by the parity of the
// challenge bits between the stage and the arbiter), with its own copy of
// the mismatch generator of the behavioural APUF. On top of it: the
// wrap-around first-layer wiring, the per-instance seeds of the core, the
// second layer, and the noise bound used to decide which responses are
// certain under evaluation noise.
package pop_ref_pkg;

  localparam int NOMINAL = 10000;
  localparam int unsigned SIZES [6] = '{2, 4, 6, 8, 12, 24};

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

  function automatic int delta(int unsigned seed, int n, logic [63:0] c);
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

  // Seed of APUF idx of layer (0..5 first layers, 6 second layer) on a chip.
  function automatic int unsigned seed_of(int unsigned chip, int unsigned layer,
                                          int unsigned idx);
    return chip * 65536 + layer * 256 + idx + 1;
  endfunction

  function automatic int noise_bound(int unsigned amp);
    return (510 * int'(amp)) / 256;
  endfunction

  // First-layer responses for challenge c; `sure` marks bits whose margin
  // exceeds the noise bound.
  function automatic void l1_eval(int unsigned chip, int unsigned layer, logic [63:0] c,
                                  int unsigned amp, output logic [63:0] r,
                                  output logic [63:0] sure);
    int n = int'(SIZES[layer]);
    for (int i = 0; i < 64; i++) begin
      logic [63:0] ci = '0;
      int d;
      for (int k = 0; k < n; k++) ci[k] = c[(i + k) % 64];
      d = delta(seed_of(chip, layer, i), n, ci);
      r[i] = d > 0;
      sure[i] = (d > noise_bound(amp)) || (d < -noise_bound(amp));
    end
  endfunction

  function automatic void l2_eval(int unsigned chip, logic [63:0] c, int unsigned amp,
                                  output logic r, output logic sure);
    int d = delta(seed_of(chip, 6, 0), 64, c);
    r = d > 0;
    sure = (d > noise_bound(amp)) || (d < -noise_bound(amp));
  endfunction

endpackage
