`timescale 1ns/1ps
// reservoir_computer_tb: end-to-end run of a reduced reservoir computer
// (20 nodes, 60 training and 40 prediction samples) through rc_check, at
// the 6.25 ns sample clock.
module reservoir_computer_tb;
  localparam int unsigned N = 20, K = 2, M = 8, TL = 60, PL = 40;
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
  rc_pkg::rc_phase_e        phase;
  logic [$clog2(DEPTH+1)-1:0] step;

  reservoir_computer #(.N(N), .K(K), .M(M), .TRAIN_LEN(TL), .PRED_LEN(PL)) dut (.*);
  rc_check #(.N(N), .M(M), .TRAIN_LEN(TL), .PRED_LEN(PL), .WSPAN(64)) chk (.*);

  initial begin
    #(6.25 * (3 * DEPTH + TL + N + 400));
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk.checks, chk.failures + 1);
    $finish;
  end
endmodule
