`timescale 1ns/1ps
// output_layer: the trained linear readout v = W_out * (x, u), computed
// combinationally within one clock period.
//
// Because the reservoir state is Boolean, the product W_out * x needs no
// multiplier: it is the sum of the weights of the nodes whose sampled state
// is 1. The direct connection from the input to the output is the only real
// multiplication (2M-bit weight times M-bit input) and runs in parallel with
// the sum.
//
// Number formats (this design's choice; the original gives only the widths):
//   * u_v and v are M-bit two's complement with M-1 fraction bits, i.e. the
//     code c stands for c / 2**(M-1) in [-1, 1).
//   * Each of the N+1 weights is 2M-bit two's complement with the same
//     M-1 fraction bits, so a weight spans [-2**M, 2**M). Weight i (node i)
//     is w_out[2M*i +: 2M]; weight N (direct connection) is the last one.
//   * The sum is accumulated without overflow in ACC_W bits; the direct
//     term is the full product shifted right by M-1 (floor). The result is
//     saturated to the M-bit range, and `saturated` flags when that happened.
//
// Ports: w_out (2M(N+1) bits, all weights in parallel), u_v (current
// reservoir input), x_reg (registered reservoir state), v (output),
// saturated. Timing: combinational; the caller registers v.
module output_layer #(
  parameter int unsigned N = 100,
  parameter int unsigned M = 8
) (
  input  logic [2*M*(N+1)-1:0] w_out,
  input  logic signed [M-1:0]  u_v,
  input  logic [N-1:0]         x_reg,
  output logic signed [M-1:0]  v,
  output logic                 saturated
);

  localparam int unsigned ACC_W = 3 * M + $clog2(N + 2);

  localparam logic signed [ACC_W-1:0] V_MAX = ACC_W'(2**(M-1) - 1);
  localparam logic signed [ACC_W-1:0] V_MIN = -ACC_W'(2**(M-1));

  logic signed [ACC_W-1:0] acc_x;    // sum of selected node weights
  logic signed [3*M-1:0]   prod;     // direct connection product
  logic signed [ACC_W-1:0] acc;

  always_comb begin
    acc_x = '0;
    for (int i = 0; i < int'(N); i++) begin
      if (x_reg[i]) acc_x = acc_x + ACC_W'(signed'(w_out[2*M*i +: 2*M]));
    end
  end

  assign prod = signed'(w_out[2*M*N +: 2*M]) * u_v;

  always_comb begin
    acc = acc_x + ACC_W'(prod >>> (M - 1));
    saturated = 1'b0;
    if (acc > V_MAX) begin
      v = V_MAX[M-1:0];
      saturated = 1'b1;
    end else if (acc < V_MIN) begin
      v = V_MIN[M-1:0];
      saturated = 1'b1;
    end else begin
      v = acc[M-1:0];
    end
  end

endmodule
