`timescale 1ns/1ps
// node: one reservoir node, an arbitrary W-input Boolean function stored as a
// look-up table.
//
// The function is given by the parameter LUT, a string of 2**W bits read
// from the most significant end: input pattern 0 selects LUT[2**W-1] and the
// all-ones pattern selects LUT[0]. With this ordering the default LUT = 1
// is the AND of all inputs, and a LUT written as the right-hand column of a
// truth table (rows 00..0 to 11..1) reads left to right. The node is purely
// combinational and has no clock: inside a reservoir it is one of the
// free-running elements of an autonomous Boolean network, and its response
// time is that of the logic it maps to.
//
// Ports: node_in (W bits, the node's inputs; in a reservoir the input bits
// come first, then the delayed states of the source nodes), node_out (the
// node state). Timing: zero-delay combinational.
//
// The LUT ordering, port names and default follow the original design's node
// code; the width W is a parameter here (3 in that code, n + k = 10 for the
// main configuration).
module node #(
  parameter int unsigned       W   = 3,
  parameter logic [2**W-1:0]   LUT = 1
) (
  input  logic [W-1:0] node_in,
  output logic         node_out
);

  localparam int unsigned LAST = 2**W - 1;

  always_comb begin
    node_out = LUT[LAST - int'(node_in)];
  end

endmodule
