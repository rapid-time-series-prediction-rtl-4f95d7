`timescale 1ns/1ps
// random_reservoir: builds a reservoir from its four hyperparameters and a
// seed, at elaboration time, and instantiates it.
//
// Construction (all draws come from rc_pkg::rnd, so they are reproducible):
//   * Topology: every node takes exactly K links from K distinct other
//     nodes, chosen uniformly.
//   * Recurrent weights W: each link gets a weight uniform in [-1, 1). The
//     spectral radius of the resulting N x N matrix is estimated and W is
//     scaled so that its radius becomes RHO.
//   * Input: round(SIGMA * N) nodes, chosen uniformly without repetition,
//     receive the input; each gets an effective weight w_in uniform in
//     [-1, 1), the others none. The B input bits are weighted as the digits
//     of a two's complement number, so that the input term equals
//     w_in * u with u = (signed B-bit code) / 2**(B-1) in [-1, 1).
//   * Node function: node i outputs 1 exactly when
//        sum_j W[i][j] * x_src(j) + w_in[i] * u  >  0,
//     evaluated for every input pattern to fill its 2**(K+B)-bit LUT.
//   * Delays: each link gets a delay uniform in [TAU_BAR/2, 3*TAU_BAR/2),
//     rounded to a whole number (at least one) of inverter pairs of
//     2*TINV_NS each.
// The spectral radius is estimated by power iteration from a random start
// vector: after a warm-up, the geometric mean of the per-step growth of the
// vector norm over many steps converges to the radius also when the leading
// eigenvalues are a complex pair. If the matrix is nilpotent the scale is
// left at 1. The estimate is split into stages of ITERS steps (20 for the
// main configuration, 180 steps in all) so that no single constant
// evaluation is long; tools bound the length of one.
//
// The nodes and links are instantiated here as in reservoir, which takes
// the same structure from explicit parameters; node i's LUT is computed in
// its own generate block for the same reason.
//
// Ports: u (B bits, input), x (N bits, node states, asynchronous). The
// defaults are the main configuration: N = 100, K = 2, B = 8, RHO = 1.5,
// SIGMA = 0.5, TAU_BAR = 11 ns. The random draws, the power iteration and
// the exclusion of self links are this design's choices; the distributions
// and the threshold rule are those of the original design.
module random_reservoir
  import rc_pkg::*;
#(
  parameter int unsigned N          = rc_pkg::RC_N_NODES,
  parameter int unsigned K          = rc_pkg::RC_K_IN,
  parameter int unsigned B          = rc_pkg::RC_U_BITS,
  parameter int unsigned SEED       = 1,
  parameter real         RHO_T      = rc_pkg::RC_RHO,
  parameter real         SIGMA_T    = rc_pkg::RC_SIGMA,
  parameter real         TAU_BAR_NS_T = rc_pkg::RC_TAU_BAR_NS,
  parameter real         TINV_NS_T  = rc_pkg::RC_TINV_NS
) (
  input  logic [B-1:0] u,
  output logic [N-1:0] x
);

  localparam int unsigned LW  = 2**(K + B);
  localparam int unsigned NIN = int'($floor(SIGMA_T * real'(N) + 0.5));

  // Sources of all links, 16 bits per link, link l = K*i + j.
  function automatic logic [N*K*16-1:0] build_src();
    logic [N*K*16-1:0] r;
    int unsigned       pick [K];
    int unsigned       cand, att;
    bit                ok;
    r = '0;
    for (int unsigned i = 0; i < N; i++) begin
      for (int unsigned j = 0; j < K; j++) begin
        att = 0;
        do begin
          cand = rnd(SEED, S_SRC, i, j * 1024 + att) % N;
          att++;
          ok = (cand != i);
          for (int unsigned p = 0; p < j; p++) if (pick[p] == cand) ok = 0;
        end while (!ok && att < 1000);
        pick[j] = cand;
        r[16*(K*i+j) +: 16] = 16'(cand);
      end
    end
    return r;
  endfunction

  // Delays of all links in inverter pairs.
  function automatic logic [N*K*16-1:0] build_dly();
    logic [N*K*16-1:0] r;
    real tau;
    int  m;
    r = '0;
    for (int unsigned l = 0; l < N * K; l++) begin
      tau = TAU_BAR_NS_T * (0.5 + unif01(SEED, S_DLY, l, 0));
      m   = int'($floor(tau / (2.0 * TINV_NS_T) + 0.5));
      if (m < 1) m = 1;
      r[16*l +: 16] = 16'(m);
    end
    return r;
  endfunction

  // Mask of the nodes that receive the input: partial Fisher-Yates shuffle.
  function automatic logic [N-1:0] build_inmask();
    logic [N-1:0] mask;
    int unsigned  perm [N];
    int unsigned  pos, tmp;
    for (int unsigned i = 0; i < N; i++) perm[i] = i;
    mask = '0;
    for (int unsigned t = 0; t < NIN; t++) begin
      pos = t + rnd(SEED, S_INSEL, t, 0) % (N - t);
      tmp = perm[t]; perm[t] = perm[pos]; perm[pos] = tmp;
      mask[perm[t]] = 1'b1;
    end
    return mask;
  endfunction

  localparam logic [N*K*16-1:0] SRC_P  = build_src();
  localparam logic [N*K*16-1:0] DLY_P  = build_dly();
  localparam logic [N-1:0]      INMASK = build_inmask();

  typedef real wvec_t [N*K];
  typedef real nvec_t [N];

  // Unscaled recurrent weights, one per link.
  function automatic wvec_t build_w();
    wvec_t w;
    for (int unsigned l = 0; l < N * K; l++) w[l] = unif_pm1(SEED, S_WREC, l / K, l % K);
    return w;
  endfunction

  localparam wvec_t WREC = build_w();

  // Spectral radius of the unscaled W by power iteration, split into stages
  // so that each constant evaluation stays short. A stage applies W ITERS
  // times to a unit vector, renormalising after every step; stage_gain
  // returns the product of the per-step growth factors.
  localparam int unsigned ITERS = (N * K > 4000) ? 1 : 4000 / (N * K);

  function automatic nvec_t start_vec();
    nvec_t vec;
    real   nrm;
    nrm = 0.0;
    for (int unsigned i = 0; i < N; i++) begin
      vec[i] = 1.0 + unif01(SEED, S_VEC, i, 0);
      nrm += vec[i] * vec[i];
    end
    nrm = nrm ** 0.5;
    for (int unsigned i = 0; i < N; i++) vec[i] = vec[i] / nrm;
    return vec;
  endfunction

  function automatic nvec_t stage_vec(nvec_t v0);
    nvec_t vec, nv;
    real   nrm;
    vec = v0;
    for (int unsigned t = 0; t < ITERS; t++) begin
      nrm = 0.0;
      for (int unsigned i = 0; i < N; i++) begin
        nv[i] = 0.0;
        for (int unsigned j = 0; j < K; j++)
          nv[i] += WREC[K*i+j] * vec[int'(SRC_P[16*(K*i+j) +: 16])];
        nrm += nv[i] * nv[i];
      end
      nrm = nrm ** 0.5;
      if (nrm == 0.0) return nv;
      for (int unsigned i = 0; i < N; i++) vec[i] = nv[i] / nrm;
    end
    return vec;
  endfunction

  function automatic real stage_gain(nvec_t v0);
    nvec_t vec, nv;
    real   nrm, prod;
    vec  = v0;
    prod = 1.0;
    for (int unsigned t = 0; t < ITERS; t++) begin
      nrm = 0.0;
      for (int unsigned i = 0; i < N; i++) begin
        nv[i] = 0.0;
        for (int unsigned j = 0; j < K; j++)
          nv[i] += WREC[K*i+j] * vec[int'(SRC_P[16*(K*i+j) +: 16])];
        nrm += nv[i] * nv[i];
      end
      nrm = nrm ** 0.5;
      if (nrm == 0.0) return 0.0;
      prod = prod * nrm;
      for (int unsigned i = 0; i < N; i++) vec[i] = nv[i] / nrm;
    end
    return prod;
  endfunction

  // Six warm-up stages, then the growth over three more.
  localparam nvec_t V0 = start_vec();
  localparam nvec_t V1 = stage_vec(V0);
  localparam nvec_t V2 = stage_vec(V1);
  localparam nvec_t V3 = stage_vec(V2);
  localparam nvec_t V4 = stage_vec(V3);
  localparam nvec_t V5 = stage_vec(V4);
  localparam nvec_t V6 = stage_vec(V5);
  localparam nvec_t V7 = stage_vec(V6);
  localparam nvec_t V8 = stage_vec(V7);
  localparam real   G6 = stage_gain(V6);
  localparam real   G7 = stage_gain(V7);
  localparam real   G8 = stage_gain(V8);
  localparam real   RADIUS = (G6 * G7 * G8) ** (1.0 / real'(3 * ITERS));
  localparam real   SCALE  = (RADIUS > 0.0) ? RHO_T / RADIUS : 1.0;

  // LUT of node i: bit LW-1-e is the threshold of the weighted sum for the
  // input pattern e = {u, x_src0, x_src1, ...}.
  function automatic logic [LW-1:0] node_lut(int unsigned i);
    logic [LW-1:0] r;
    real           w [K];
    real           win, s;
    int            ucode;
    for (int unsigned j = 0; j < K; j++) w[j] = SCALE * WREC[K*i+j];
    win = INMASK[i] ? unif_pm1(SEED, S_WIN, i, 0) : 0.0;
    for (int unsigned e = 0; e < LW; e++) begin
      s = 0.0;
      for (int unsigned j = 0; j < K; j++)
        if (e[K-1-j]) s += w[j];
      ucode = int'(e >> K);
      if (ucode >= 2**(B-1)) ucode -= 2**B;
      s += win * real'(ucode) / real'(2**(B-1));
      r[LW-1-e] = (s > 0.0);
    end
    return r;
  endfunction

  // Structure as in reservoir: K delayed links into every node, input first.
  logic [N*K-1:0] x_tau;

  for (genvar l = 0; l < N * K; l++) begin : g_link
    localparam int unsigned S = int'(SRC_P[16*l +: 16]);
    localparam int unsigned D = int'(DLY_P[16*l +: 16]);
    delay_line #(.M(D), .TINV_NS(TINV_NS_T)) u_delay (
      .delay_in (x[S]),
      .delay_out(x_tau[l])
    );
  end

  for (genvar i = 0; i < N; i++) begin : g_node
    localparam logic [LW-1:0] LUT = node_lut(i);
    logic [K-1:0] links;
    for (genvar j = 0; j < K; j++) begin : g_in
      assign links[K-1-j] = x_tau[K*i + j];
    end
    node #(.W(K + B), .LUT(LUT)) u_node (
      .node_in ({u, links}),
      .node_out(x[i])
    );
  end

endmodule
