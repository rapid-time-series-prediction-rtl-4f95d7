`timescale 1ns/1ps
// rc_full_tb: one complete run of reservoir_computer at its default size
// (100 nodes, in-degree 2, 8-bit input, 1500 training and 2320 prediction
// samples, mean link delay 11 ns) at the 6.25 ns sample clock, checked by
// rc_check. Weights are random, so this checks the machine, not the quality
// of a prediction.
module rc_full_tb;
  import rc_pkg::*;
  localparam int unsigned N = RC_N_NODES, M = RC_U_BITS;
  localparam int unsigned TL = RC_TRAIN_LEN, PL = RC_PRED_LEN;
  localparam int unsigned DEPTH = TL + PL;

  logic clk = 0;
  always #3.125 clk = ~clk;

  logic rst_n, start, u_we, w_we;
  logic [$clog2(TL)-1:0]    u_addr;
  logic [M-1:0]             u_wdata;
  logic [$clog2(N+1)-1:0]   w_addr;
  logic [2*M-1:0]           w_wdata;
  logic [$clog2(DEPTH)-1:0] rd_addr;
  logic [N-1:0]             rd_x, x_q;
  logic [M-1:0]             rd_v, u_v, v;
  logic                     mode, done, v_saturated;
  rc_phase_e                phase;
  logic [$clog2(DEPTH+1)-1:0] step;

  reservoir_computer dut (.*);
  rc_check #(.N(N), .M(M), .TRAIN_LEN(TL), .PRED_LEN(PL), .WSPAN(16)) chk (.*);

  initial begin
    #(6.25 * (3 * DEPTH + TL + N + 400));
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.checks, chk.failures + 1);
    $finish;
  end
endmodule
