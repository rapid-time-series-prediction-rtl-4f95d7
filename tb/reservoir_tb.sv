`timescale 1ns/1ps
// reservoir_tb: runs the three-node example reservoir (the module's
// defaults) with a random 1-bit input that changes every 6.25 ns, and checks
// the network's continuous-time behaviour against its defining equations.
//
// The node states and the input are sampled every 10 ps. At every sample
// time t the testbench evaluates, for each node i,
//   x_i(t) = Theta( w_in[i]*u(t) + sum_j W[i][s_j] * x_{s_j}(t - d_ij) )
// from the example's real-valued weights and link delays (d in units of an
// inverter pair, 0.38 ns), not from the LUTs. Instants where an input of the
// equation changed within 0.2 ns (a pulse that short is absorbed by the
// inverter chain) or the node is switching are skipped. The number of node
// transitions is counted and must be above zero. The nodes are forced to
// 0 for the first 20 ns; from there the input drives the network into its
// state (1,0,0), which no input leaves, and the run must end there.
module reservoir_tb;
  localparam int NS = 30000;          // samples of 10 ps (300 ns)
  localparam int D2 = 38;             // samples per inverter pair

  int checks = 0, failures = 0, skipped = 0, transitions = 0;
  logic [0:0] u = 0;
  logic [2:0] x;
  logic [2:0] xh [NS];
  logic       uh [NS];

  reservoir dut (.u(u), .x(x));

  // example: W rows and link sources/delays (delays as in the instantiation)
  real    wrow [3][3] = '{'{0.1, 0.3, 0.0}, '{-0.2, 0.0, 0.1}, '{-0.3, 0.2, 0.0}};
  real    win  [3]    = '{0.1, -0.2, 0.2};
  int     src  [3][2] = '{'{0, 1}, '{0, 2}, '{0, 1}};
  int     dly  [3][2] = '{'{10, 15}, '{6, 7}, '{10, 12}};

  initial begin
    #((NS + 1000) * 0.01);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // all nodes held at 0 for the first 20 ns, then released with u = 0
  initial begin
    force dut.x = 3'b000;
    #20 release dut.x;
  end

  initial begin
    #25;
    forever begin
      #6.25 u = 1'($urandom);
    end
  end

  function automatic bit stable(input int node, input int t, input int w);
    for (int k = t - w; k <= t + w; k++)
      if (k < 1 || k >= NS || xh[k][node] != xh[k-1][node]) return 0;
    return 1;
  endfunction

  initial begin
    #0.005;
    for (int t = 0; t < NS; t++) begin
      xh[t] = x; uh[t] = u[0];
      if (t > 0) transitions += $countones(xh[t] ^ xh[t-1]);
      #0.01;
    end
    for (int t = 2000; t < NS; t++) begin
      for (int i = 0; i < 3; i++) begin
        real s;
        bit ok;
        ok = (uh[t] == uh[t-2]) && (xh[t][i] == xh[t-1][i]) && (xh[t][i] == xh[t+1 < NS ? t+1 : t][i]);
        s = win[i] * uh[t];
        for (int j = 0; j < 2; j++) begin
          int tp;
          tp = t - D2 * dly[i][j];
          if (!stable(src[i][j], tp, 20)) ok = 0;
          s += wrow[i][src[i][j]] * xh[tp][src[i][j]];
        end
        if (!ok) begin skipped++; continue; end
        checks++;
        if (xh[t][i] != (s > 0.0)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0.2f ns node %0d: x=%b expected %b", t * 0.01, i, xh[t][i], s > 0.0);
        end
      end
    end
    $display("node transitions=%0d checked=%0d skipped=%0d", transitions, checks, skipped);
    checks++;
    if (transitions == 0) begin failures++; $display("FAIL: reservoir never switched"); end
    // (1,0,0) absorbs the example network: x0 holds itself on and the
    // others off whatever the input
    checks++;
    if (x != 3'b001) begin failures++; $display("FAIL: final state %b, not 001", x); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
