`timescale 1ns/1ps
// rc_check: stimulus and checker for reservoir_computer, shared by the
// reduced-size and the full-size end-to-end testbenches.
//
// It drives the DUT through one complete run and checks it against a
// reference model of the clocked part written here independently:
//   1. reset; load TRAIN_LEN samples of a test series (a sum of two sines,
//      quantised to M bits) and N+1 random output weights;
//   2. let the reservoir settle with zero input, pulse start;
//   3. every cycle (sampled at the falling edge) check phase, mode and step;
//      that the reservoir input is the stored sample while training and the
//      registered output while predicting; and that the registered output
//      equals the readout of the previous cycle's sampled state and input,
//      computed here with integer arithmetic;
//   4. check that done comes exactly TRAIN_LEN + PRED_LEN cycles after the
//      run started (one prediction per clock period);
//   5. read the whole state recorder back and compare every entry with the
//      state and output observed during the run.
// It also counts the mechanisms of the design and fails if one never
// happened: the switch from training to closed-loop prediction, closed-loop
// cycles, output saturation, and activity of the free-running reservoir.
module rc_check #(
  parameter int unsigned N         = 10,
  parameter int unsigned M         = 8,
  parameter int unsigned TRAIN_LEN = 40,
  parameter int unsigned PRED_LEN  = 30,
  parameter int unsigned WSPAN     = 64,   // weights uniform in [-WSPAN, WSPAN)
  localparam int unsigned DEPTH = TRAIN_LEN + PRED_LEN,
  localparam int unsigned UAW   = $clog2(TRAIN_LEN),
  localparam int unsigned WAW   = $clog2(N + 1),
  localparam int unsigned RAW   = $clog2(DEPTH),
  localparam int unsigned SW    = $clog2(DEPTH + 1)
) (
  input  logic           clk,
  output logic           rst_n,
  output logic           start,
  output logic           u_we,
  output logic [UAW-1:0] u_addr,
  output logic [M-1:0]   u_wdata,
  output logic           w_we,
  output logic [WAW-1:0] w_addr,
  output logic [2*M-1:0] w_wdata,
  output logic [RAW-1:0] rd_addr,
  input  logic [N-1:0]   rd_x,
  input  logic [M-1:0]   rd_v,
  input  logic [M-1:0]   u_v,
  input  logic [M-1:0]   v,
  input  logic [N-1:0]   x_q,
  input  logic           mode,
  input  rc_pkg::rc_phase_e phase,
  input  logic [SW-1:0]  step,
  input  logic           done,
  input  logic           v_saturated
);
  import rc_pkg::*;

  int checks = 0, failures = 0;
  int n_switch = 0, n_closed = 0, n_sat = 0, n_active = 0, n_done = 0;

  int          samples [TRAIN_LEN];
  int          weights [N+1];
  logic [N-1:0] xs [DEPTH];
  logic [M-1:0] vs [DEPTH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic int sx(input logic [M-1:0] a);
    return (a >= M'(2**(M-1))) ? int'(a) - 2**M : int'(a);
  endfunction

  // Reference readout: sum of the weights of active nodes plus the direct
  // term floor(w_d * u / 2**(M-1)), saturated to M bits.
  function automatic logic [M-1:0] readout(input logic [N-1:0] xv, input logic [M-1:0] uv);
    longint acc, prod;
    acc = 0;
    for (int i = 0; i < int'(N); i++) if (xv[i]) acc += weights[i];
    prod = longint'(weights[N]) * longint'(sx(uv));
    acc += prod >>> (M - 1);
    if (acc > 2**(M-1) - 1) acc = 2**(M-1) - 1;
    if (acc < -(2**(M-1))) acc = -(2**(M-1));
    return M'(acc);
  endfunction

  function automatic bit would_saturate(input logic [N-1:0] xv, input logic [M-1:0] uv);
    longint acc, prod;
    acc = 0;
    for (int i = 0; i < int'(N); i++) if (xv[i]) acc += weights[i];
    prod = longint'(weights[N]) * longint'(sx(uv));
    acc += prod >>> (M - 1);
    return (acc > 2**(M-1) - 1) || (acc < -(2**(M-1)));
  endfunction

  logic [N-1:0] x_prev;
  logic [M-1:0] u_prev;
  bit           have_prev = 0;
  bit           w_loaded  = 0;  // the DUT holds the reference weights
  bit           run_seen  = 0;
  logic         mode_prev = 1;
  int           start_cycle = 0, cyc = 0, done_cycle = -1;

  initial begin
    rst_n = 0; start = 0; u_we = 0; w_we = 0; u_addr = '0; u_wdata = '0;
    w_addr = '0; w_wdata = '0; rd_addr = '0;
    for (int t = 0; t < int'(TRAIN_LEN); t++) begin
      real s;
      s = 0.55 * $sin(2.0 * 3.14159265 * t / 37.0) + 0.3 * $sin(2.0 * 3.14159265 * t / 11.3);
      samples[t] = int'($floor(s * 2.0**(M-1) + 0.5));
    end
    for (int i = 0; i <= int'(N); i++) weights[i] = int'($urandom % (2 * WSPAN)) - int'(WSPAN);
    weights[N] = 2**(M-1) / 2;   // direct connection 0.5
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < int'(TRAIN_LEN); t++) begin
      @(posedge clk); #1;
      u_we = 1; u_addr = UAW'(t); u_wdata = M'(samples[t]);
    end
    for (int i = 0; i <= int'(N); i++) begin
      @(posedge clk); #1;
      u_we = 0; w_we = 1; w_addr = WAW'(i); w_wdata = (2*M)'(weights[i]);
    end
    @(posedge clk); #1 w_we = 0;
    @(posedge clk); #1 w_loaded = 1;
    repeat (20) @(posedge clk);
    #1 start = 1;
    @(posedge clk); #1 start = 0;
    start_cycle = cyc + 1;
    wait (done_cycle >= 0);
    repeat (3) @(posedge clk);
    check(phase == RC_IDLE && mode == 1'b1, "idle with mode 1 after the run");
    // read back the recorder, one cycle latency
    for (int a = 0; a < int'(DEPTH); a++) begin
      @(posedge clk); #1 rd_addr = RAW'(a);
      @(posedge clk); #1;
      check(rd_x == xs[a], $sformatf("recorder x[%0d]", a));
      check(rd_v == vs[a], $sformatf("recorder v[%0d]", a));
    end
    $display("mechanisms: mode_switch=%0d closed_loop_cycles=%0d saturations=%0d reservoir_active_cycles=%0d done=%0d",
             n_switch, n_closed, n_sat, n_active, n_done);
    check(n_switch == 1, "exactly one switch from training to prediction");
    check(n_closed == int'(PRED_LEN), "closed-loop cycles");
    check(n_sat > 0, "output saturation happened");
    check(n_active > 0, "reservoir state changed between samples");
    check(n_done == 1, "one done pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle-by-cycle model, sampled mid-cycle
  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (have_prev && w_loaded) begin
        check(v == readout(x_prev, u_prev), $sformatf("v at cycle %0d", cyc));
        if (would_saturate(x_prev, u_prev)) n_sat++;
      end
      if (phase != RC_IDLE) begin
        int c;
        c = cyc - start_cycle;
        run_seen = 1;
        check(int'(step) == c, $sformatf("step %0d expected %0d", step, c));
        check(phase == ((c < int'(TRAIN_LEN)) ? RC_TRAIN : RC_PREDICT), "phase");
        check(mode == (c < int'(TRAIN_LEN)), "mode");
        if (c < int'(TRAIN_LEN)) check(u_v == M'(samples[c]), $sformatf("u_v = sample %0d", c));
        else begin
          check(u_v == v, "closed loop: u_v = v");
          n_closed++;
        end
        if (c >= 0 && c < int'(DEPTH)) begin xs[c] = x_q; vs[c] = v; end
        if (c > 0 && x_q != x_prev) n_active++;
      end else if (!run_seen) begin
        check(u_v == '0 && mode, "idle input is zero");
      end
      if (mode_prev && !mode) n_switch++;
      if (done) begin
        n_done++;
        done_cycle = cyc;
        check(cyc - start_cycle == int'(DEPTH), $sformatf("done after %0d cycles, expected %0d",
              cyc - start_cycle, DEPTH));
      end
      mode_prev = mode;
      x_prev    = x_q;
      u_prev    = u_v;
      have_prev = 1;
    end
  end

endmodule
