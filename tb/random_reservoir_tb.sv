`timescale 1ns/1ps
// random_reservoir_tb: checks the reservoir generator at its default
// hyperparameters (N = 100, k = 2, 8-bit input, rho = 1.5, sigma = 0.5,
// mean delay 11 ns) and runs the generated network.
//   * every node has k distinct sources, none of them itself;
//   * every link delay lies in [tau/2, 3 tau/2] (in inverter pairs of
//     0.38 ns, allowing for rounding) and the mean is within 10 % of tau;
//   * exactly 50 nodes receive the input;
//   * the scaled recurrent matrix has spectral radius 1.5 within 7 %, by a
//     long power iteration done here (3000 steps);
//   * every LUT bit of every node equals the threshold of its weighted sum,
//     recomputed here from the weight draws for all 1024 input patterns;
//   * driven by a random input changing every 6.25 ns for 300 ns, the
//     network switches.
module random_reservoir_tb;
  import rc_pkg::*;
  localparam int N = 100, K = 2, B = 8, LW = 1024;
  int checks = 0, failures = 0, transitions = 0;

  logic [B-1:0] u = '0;
  logic [N-1:0] x, x_last;

  random_reservoir dut (.u(u), .x(x));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int srcof(int l);
    return int'(dut.SRC_P[16*l +: 16]);
  endfunction

  // LUT check, one generate block per node
  int lut_fail = 0, lut_checks = 0;
  for (genvar i = 0; i < N; i++) begin : g_lut
    initial begin
      real w0, w1, wi, s;
      int uc;
      w0 = dut.SCALE * unif_pm1(1, S_WREC, i, 0);
      w1 = dut.SCALE * unif_pm1(1, S_WREC, i, 1);
      wi = dut.INMASK[i] ? unif_pm1(1, S_WIN, i, 0) : 0.0;
      for (int e = 0; e < LW; e++) begin
        uc = e / 4; if (uc >= 128) uc -= 256;
        s = (e[1] ? w0 : 0.0) + (e[0] ? w1 : 0.0) + wi * uc / 128.0;
        lut_checks++;
        if (dut.g_node[i].LUT[LW-1-e] != (s > 0.0)) lut_fail++;
      end
    end
  end

  initial begin
    real v [N], nv [N], nrm, logsum, rho, dsum;
    int  dmin, dmax, nin;
    #1;
    // topology
    for (int i = 0; i < N; i++) begin
      check(srcof(K*i) != i && srcof(K*i+1) != i, $sformatf("node %0d has no self link", i));
      check(srcof(K*i) != srcof(K*i+1), $sformatf("node %0d sources distinct", i));
      check(srcof(K*i) < N && srcof(K*i+1) < N, "source index in range");
    end
    // delays
    dmin = int'($floor(11.0 / 2.0 / 0.38));
    dmax = int'($ceil(11.0 * 1.5 / 0.38));
    dsum = 0.0;
    for (int l = 0; l < N * K; l++) begin
      int d;
      d = int'(dut.DLY_P[16*l +: 16]);
      dsum += d * 0.38;
      check(d >= dmin && d <= dmax, $sformatf("link %0d delay %0d pairs", l, d));
    end
    check(dsum / (N * K) > 9.9 && dsum / (N * K) < 12.1, $sformatf("mean delay %0.2f ns", dsum / (N * K)));
    // input density
    nin = $countones(dut.INMASK);
    check(nin == 50, $sformatf("%0d input nodes", nin));
    // spectral radius of the scaled matrix
    for (int i = 0; i < N; i++) v[i] = 1.0 + 0.01 * i;
    logsum = 0.0;
    for (int t = 0; t < 3000; t++) begin
      nrm = 0.0;
      for (int i = 0; i < N; i++) begin
        nv[i] = dut.SCALE * (unif_pm1(1, S_WREC, i, 0) * v[srcof(K*i)] +
                             unif_pm1(1, S_WREC, i, 1) * v[srcof(K*i+1)]);
        nrm += nv[i] * nv[i];
      end
      nrm = $sqrt(nrm);
      for (int i = 0; i < N; i++) v[i] = nv[i] / nrm;
      if (t >= 1000) logsum += $ln(nrm);
    end
    rho = $exp(logsum / 2000.0);
    $display("spectral radius of scaled W: %0.4f (generator estimate of unscaled: %0.4f)", rho, dut.RADIUS);
    check(rho > 1.5 * 0.93 && rho < 1.5 * 1.07, $sformatf("spectral radius %0.4f", rho));
    // LUTs
    wait (lut_checks == N * LW);
    checks += lut_checks;
    failures += lut_fail;
    if (lut_fail) $display("FAIL: %0d LUT bits differ", lut_fail);
    // activity
    x_last = x;
    for (int t = 0; t < 300 * 20; t++) begin
      #0.05;
      if (t % 125 == 0) u = B'($urandom);
      transitions += $countones(x ^ x_last);
      x_last = x;
    end
    $display("node transitions in 300 ns: %0d", transitions);
    check(transitions > 0, "network switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
