`timescale 1ns/1ps
// output_layer_tb: drives random weights, states and inputs into a 12-node
// readout and compares v with a reference computed in real arithmetic:
// v = sum of the selected weights + w_d * u, in units of 2**-(M-1),
// rounded down and clipped to [-1, 1 - 2**-(M-1)]. Half of the vectors use
// small weights (no clipping), half large ones (clipping both ways). The
// saturated flag is checked too, and both saturation directions and the
// direct term alone (x = 0) must occur.
module output_layer_tb;
  localparam int N = 12, M = 8;
  int checks = 0, failures = 0, n_pos = 0, n_neg = 0, n_dir = 0;

  logic [2*M*(N+1)-1:0] w_out;
  logic signed [M-1:0]  u_v, v;
  logic [N-1:0]         x_reg;
  logic                 saturated;
  int                   w [N+1];

  output_layer #(.N(N), .M(M)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      real s, lsb;
      int  span, exp_v;
      bit  exp_sat;
      lsb  = 1.0 / 2.0**(M-1);
      span = (t % 2) ? 32768 : 16;
      for (int i = 0; i <= N; i++) begin
        w[i] = int'($urandom % (2 * span)) - span;
        w_out[2*M*i +: 2*M] = (2*M)'(w[i]);
      end
      x_reg = (t % 7 == 0) ? '0 : N'($urandom);
      u_v   = M'($urandom);
      #1;
      s = 0.0;
      for (int i = 0; i < N; i++) if (x_reg[i]) s += w[i] * lsb;
      s += (w[N] * lsb) * (real'(u_v) * lsb);
      exp_v = int'($floor(s / lsb + 1e-9));
      exp_sat = 0;
      if (exp_v > 2**(M-1) - 1) begin exp_v = 2**(M-1) - 1; exp_sat = 1; n_pos++; end
      if (exp_v < -(2**(M-1)))  begin exp_v = -(2**(M-1)); exp_sat = 1; n_neg++; end
      if (x_reg == '0 && !exp_sat) n_dir++;
      check(int'(v) == exp_v, $sformatf("v=%0d expected %0d", v, exp_v));
      check(saturated == exp_sat, "saturated flag");
    end
    $display("saturations: positive=%0d negative=%0d direct-only=%0d", n_pos, n_neg, n_dir);
    check(n_pos > 0 && n_neg > 0 && n_dir > 0, "all cases occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
