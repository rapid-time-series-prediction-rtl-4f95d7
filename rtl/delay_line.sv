`timescale 1ns/1ps
// delay_line: a chain of 2*M inverters that delays a reservoir link.
//
// The reservoir has no clock, so the only way to slow its dynamics down to
// the rate of the clocked input is to lengthen its links. Each link is a
// chain of M inverter pairs; the pairs cancel logically, so the output equals
// the input, but it arrives 2*M inverter delays later. The chain nets carry
// the keep attribute so that synthesis does not remove the inverters (the
// attribute's name differs between tools; the original design used Quartus'
// /* synthesis keep */).
//
// For simulation the whole chain's delay, 2 * M * TINV_NS (TINV_NS = 0.19
// ns, the mean measured inverter delay of the FPGA the design was built on),
// is lumped into one transport delay at the chain's end (a delayed
// nonblocking assignment, so that every edge arrives, however close to the
// next one, as it does through a chain of inverters); the inverters
// themselves are modelled without delay. Lumping keeps the simulation model
// of a 100-node reservoir at a few hundred timed events instead of some ten
// thousand, and it changes no logic value: an even chain is the identity.
// A synthesis tool ignores the delay. An FPGA flow that honours keep on the
// chain nets keeps the inverters; a generic flow that does not (yosys'
// coarse synthesis, for one) folds each pair away and leaves a wire, which
// is logically right but carries no delay. On silicon the delay is whatever
// the routed inverters give, so the chain length M is the only part under
// the designer's control.
//
// Ports: delay_in, delay_out. Timing: delay_out follows delay_in after
// 2 * M * TINV_NS.
module delay_line #(
  parameter int unsigned M       = 1,    // number of inverter pairs
  parameter real         TINV_NS = 0.19  // delay of one inverter in ns
) (
  input  logic delay_in,
  output logic delay_out
);

  (* keep *) wire [2*M:0] chain;

  assign chain[0] = delay_in;

  for (genvar g = 0; g < 2 * M; g++) begin : g_inv
    assign chain[g+1] = ~chain[g];
  end

  localparam real DELAY_NS = 2.0 * real'(M) * TINV_NS;

  // Schedule the current value, then wait for the next edge; the first pass
  // also carries the power-up value through.
  always begin
    delay_out <= #(DELAY_NS) chain[2*M];
    @(chain[2*M]);
  end

endmodule
