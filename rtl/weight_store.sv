`timescale 1ns/1ps
// weight_store: holds the N+1 trained output weights and presents all of
// them at once to the output layer.
//
// The readout adds any subset of the weights within one clock period, so
// the weights cannot sit behind a single memory read port; they are held in
// N+1 registers of 2M bits, written one at a time by the host after
// training. Reset clears every weight to zero (output v = 0).
//
// Ports: clk, rst_n (active low, synchronous); we, waddr, wdata (host
// write, one weight per cycle, waddr = N is the direct-connection weight;
// addresses above N are ignored); w_out (all weights, weight i at
// w_out[2M*i +: 2M]). Timing: a write is visible on w_out from the cycle
// after it.
module weight_store #(
  parameter int unsigned N = 100,
  parameter int unsigned M = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(N+1)-1:0]     waddr,
  input  logic [2*M-1:0]             wdata,
  output logic [2*M*(N+1)-1:0]       w_out
);

  logic [2*M-1:0] w [N+1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i <= int'(N); i++) w[i] <= '0;
    end else if (we && int'(waddr) <= int'(N)) begin
      w[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int i = 0; i <= int'(N); i++) w_out[2*M*i +: 2*M] = w[i];
  end

endmodule
