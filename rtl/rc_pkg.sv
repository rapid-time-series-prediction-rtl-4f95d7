`timescale 1ns/1ps
// rc_pkg: constants, types and elaboration-time helpers shared by the
// reservoir computer.
//
// The constants are the configuration the design is built for: a reservoir
// of 100 nodes, in-degree 2, an 8-bit input, spectral radius 1.5, input
// density 0.5, mean link delay 11 ns, inverter delay 0.19 ns, 1500 training
// samples and a 6.25 ns sample clock (160 MHz). The prediction length of
// 2320 samples is 100 Lyapunov times of the Mackey-Glass series sampled at
// dt = 5 (100 * 116 / 5); the hardware itself does not depend on it.
//
// The helpers are a counter-based pseudo-random generator (a 32-bit integer
// hash of a seed and up to three indices) that the reservoir generator uses
// at elaboration time to draw its random topology, weights and delays. Being
// counter based, any single draw can be recomputed from its indices alone,
// so testbenches can rebuild the same random matrices independently.
package rc_pkg;

  localparam int unsigned RC_N_NODES = 100;   // reservoir size N
  localparam int unsigned RC_K_IN = 2;     // in-degree k of every node
  localparam int unsigned RC_U_BITS = 8;     // bits n of the input u(t)
  localparam int unsigned RC_TRAIN_LEN = 1500;  // stored training samples
  localparam int unsigned RC_PRED_LEN = 2320;  // closed-loop samples per run
  localparam real         RC_RHO = 1.5;   // spectral radius of W
  localparam real         RC_SIGMA = 0.5;   // fraction of nodes fed by u
  localparam real         RC_TAU_BAR_NS = 11.0; // mean link delay
  localparam real         RC_TINV_NS = 0.19;  // delay of one inverter
  localparam real         RC_T_CLK_NS = 6.25;  // global clock period

  // Operating phase of the reservoir computer.
  typedef enum logic [1:0] {
    RC_IDLE    = 2'd0,  // input held at zero, nothing recorded
    RC_TRAIN   = 2'd1,  // stored samples drive the reservoir (mode = 1)
    RC_PREDICT = 2'd2   // the output is fed back as input (mode = 0)
  } rc_phase_e;

  // 32-bit integer finaliser (a murmur/splitmix style avalanche).
  function automatic int unsigned mix32(int unsigned a);
    a = a ^ (a >> 16);
    a = a * 32'h7feb352d;
    a = a ^ (a >> 15);
    a = a * 32'h846ca68b;
    a = a ^ (a >> 16);
    return a;
  endfunction

  // One random word for (seed, stream, i, j).
  function automatic int unsigned rnd(int unsigned seed, int unsigned stream,
                                      int unsigned i, int unsigned j);
    int unsigned h;
    h = mix32(seed ^ 32'h9e3779b9);
    h = mix32(h ^ (stream * 32'h85ebca6b));
    h = mix32(h ^ (i * 32'hc2b2ae35));
    h = mix32(h ^ (j * 32'h27d4eb2f + 32'h165667b1));
    return h;
  endfunction

  // Uniform real in [0, 1).
  function automatic real unif01(int unsigned seed, int unsigned stream,
                                 int unsigned i, int unsigned j);
    return real'(rnd(seed, stream, i, j)) / 4294967296.0;
  endfunction

  // Uniform real in [-1, 1).
  function automatic real unif_pm1(int unsigned seed, int unsigned stream,
                                   int unsigned i, int unsigned j);
    return 2.0 * unif01(seed, stream, i, j) - 1.0;
  endfunction

  // Random streams used by the reservoir generator.
  localparam int unsigned S_SRC   = 1;  // choice of link sources
  localparam int unsigned S_WREC  = 2;  // recurrent weights W
  localparam int unsigned S_INSEL = 3;  // which nodes receive the input
  localparam int unsigned S_WIN   = 4;  // effective input weights
  localparam int unsigned S_DLY   = 5;  // link delays
  localparam int unsigned S_VEC   = 6;  // start vector of the radius estimate

endpackage
