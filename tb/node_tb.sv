`timescale 1ns/1ps
// node_tb: checks the look-up-table node exhaustively.
// Four 3-input nodes: the default (AND of all inputs) and the three LUTs of
// the three-node example reservoir. Their expected outputs are computed
// here from the example's weights, not from the LUT strings: node i fires
// when w_in[i]*u + W[i][s0]*x_s0 + W[i][s1]*x_s1 > 0 for the inputs
// {u, x_s0, x_s1}. A 10-input node (the main configuration's width) is
// checked against a threshold function defined here as well.
module node_tb;
  int checks = 0, failures = 0;

  logic [2:0] in3;
  logic       y_and, y0, y1, y2;
  logic [9:0] in10;
  logic       y10;

  // Threshold function of the 10-input node: 2 link weights and a signed
  // 8-bit input code with weight 0.7/128.
  function automatic logic [1023:0] thr_lut();
    logic [1023:0] r;
    for (int e = 0; e < 1024; e++) begin
      real s; int uc;
      uc = e >> 2; if (uc >= 128) uc -= 256;
      s = (e[1] ? 0.4 : 0.0) + (e[0] ? -0.9 : 0.0) + 0.7 * uc / 128.0;
      r[1023 - e] = (s > 0.0);
    end
    return r;
  endfunction

  node                                   u_and (.node_in(in3), .node_out(y_and));
  node #(.W(3), .LUT(8'b01111111))       u_n0  (.node_in(in3), .node_out(y0));
  node #(.W(3), .LUT(8'b01000000))       u_n1  (.node_in(in3), .node_out(y1));
  node #(.W(3), .LUT(8'b01001101))       u_n2  (.node_in(in3), .node_out(y2));
  node #(.W(10), .LUT(thr_lut()))        u_n10 (.node_in(in10), .node_out(y10));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int e = 0; e < 8; e++) begin
      real s0, s1, s2;
      bit u, a, b;
      in3 = 3'(e); #1;
      u = e[2]; a = e[1]; b = e[0];
      // example weights: W = [0.1 0.3 0; -0.2 0 0.1; -0.3 0.2 0], w_in = [0.1 -0.2 0.2]
      // node 0 links x0,x1; node 1 links x0,x2; node 2 links x0,x1
      s0 =  0.1 * u + 0.1 * a + 0.3 * b;
      s1 = -0.2 * u - 0.2 * a + 0.1 * b;
      s2 =  0.2 * u - 0.3 * a + 0.2 * b;
      check(y_and == (e == 7), $sformatf("AND in=%b", in3));
      check(y0 == (s0 > 0.0), $sformatf("node0 in=%b", in3));
      check(y1 == (s1 > 0.0), $sformatf("node1 in=%b", in3));
      check(y2 == (s2 > 0.0), $sformatf("node2 in=%b", in3));
    end
    for (int e = 0; e < 1024; e++) begin
      real s; int uc;
      in10 = 10'(e); #1;
      uc = e >> 2; if (uc >= 128) uc -= 256;
      s = (e[1] ? 0.4 : 0.0) + (e[0] ? -0.9 : 0.0) + 0.7 * uc / 128.0;
      check(y10 == (s > 0.0), $sformatf("10-input node in=%0d", e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
