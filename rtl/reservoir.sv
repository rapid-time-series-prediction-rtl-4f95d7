`timescale 1ns/1ps
// reservoir: an autonomous, time-delay Boolean network of N nodes.
//
// Every node i is a look-up-table node (see node) with K + B inputs: the B
// bits of the input u, followed by the states of K source nodes, each seen
// through its own delay_line. Link l = K*i + j (j = 0..K-1) runs from node
// SRC[l] to input j of node i and is DLY[l] inverter pairs long. The network
// has no clock: it evolves continuously, and the clocked logic around it
// only changes u and samples x.
//
// Node input order: node_in = {u, x_tau[K*i], x_tau[K*i+1], ...}, i.e. the
// input bits are the most significant, then the links in index order. The
// LUT of node i is LUTS[i*2**(K+B) +: 2**(K+B)] in the node's ordering.
//
// Parameters are packed vectors, 16 bits per link for SRC and DLY. The
// defaults are the three-node example of the original design (N = 3, k = 2,
// one input bit), whose LUTs follow from its weight matrices: 01111111,
// 01000000 and 01001101, and whose link delays are 10, 15, 6, 7, 10 and 12
// pairs. The generator that builds the full-size reservoir from its
// hyperparameters is random_reservoir.
//
// The node outputs feed back into the nodes through the delay lines, so the
// network is a set of combinational loops by construction: that is the
// reservoir. Every loop passes through at least one delay line, so in
// simulation each loop has a finite delay and the network oscillates rather
// than hanging.
//
// Ports: u (B bits, input; held constant for a clock period by the
// surrounding logic), x (N bits, the node states, asynchronous).
module reservoir #(
  parameter int unsigned N = 3,
  parameter int unsigned K = 2,
  parameter int unsigned B = 1,
  parameter logic [N*(2**(K+B))-1:0] LUTS = {8'b01001101, 8'b01000000, 8'b01111111},
  parameter logic [N*K*16-1:0]       SRC  = {16'd1, 16'd0, 16'd2, 16'd0, 16'd1, 16'd0},
  parameter logic [N*K*16-1:0]       DLY  = {16'd12, 16'd10, 16'd7, 16'd6, 16'd15, 16'd10},
  parameter real                     TINV_NS = 0.19
) (
  input  logic [B-1:0] u,
  output logic [N-1:0] x
);

  localparam int unsigned W  = K + B;
  localparam int unsigned LW = 2**W;

  logic [N*K-1:0] x_tau;  // delayed source states, one per link

  for (genvar l = 0; l < N * K; l++) begin : g_link
    localparam int unsigned S = int'(SRC[16*l +: 16]);
    localparam int unsigned D = int'(DLY[16*l +: 16]);
    delay_line #(.M(D), .TINV_NS(TINV_NS)) u_delay (
      .delay_in (x[S]),
      .delay_out(x_tau[l])
    );
  end

  for (genvar i = 0; i < N; i++) begin : g_node
    logic [K-1:0] links;
    for (genvar j = 0; j < K; j++) begin : g_in
      assign links[K-1-j] = x_tau[K*i + j];
    end
    node #(.W(W), .LUT(LUTS[LW*i +: LW])) u_node (
      .node_in ({u, links}),
      .node_out(x[i])
    );
  end

endmodule
