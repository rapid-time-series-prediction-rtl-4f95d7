`timescale 1ns/1ps
// state_recorder: stores the sampled reservoir state and the output of
// every cycle of a run, for the host to read back.
//
// Training needs the reservoir response to the training series (the host
// fits the output weights to it), and evaluating a prediction needs the
// output series; both are captured here, one entry per clock cycle, so
// that nothing has to leave the chip at the sample rate. Entry a holds
// {x, v} as presented while rec_en is high with rec_addr = a.
//
// Ports: clk; rec_en, rec_addr, x_in (N bits), v_in (M bits) (write side);
// rd_addr, rd_x, rd_v (host read side). Timing: a write takes effect at the
// rising edge; a read returns the entry one cycle after rd_addr is
// presented (registered read, as block RAM does). Contents are not reset.
module state_recorder #(
  parameter int unsigned N     = 100,
  parameter int unsigned M     = 8,
  parameter int unsigned DEPTH = 3820,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rec_en,
  input  logic [AW-1:0] rec_addr,
  input  logic [N-1:0]  x_in,
  input  logic [M-1:0]  v_in,
  input  logic [AW-1:0] rd_addr,
  output logic [N-1:0]  rd_x,
  output logic [M-1:0]  rd_v
);

  logic [N+M-1:0] mem [DEPTH];
  logic [N+M-1:0] rd_q;

  always_ff @(posedge clk) begin
    if (rec_en && int'(rec_addr) < int'(DEPTH)) mem[rec_addr] <= {x_in, v_in};
    rd_q <= mem[rd_addr];
  end

  assign rd_x = rd_q[N+M-1:M];
  assign rd_v = rd_q[M-1:0];

endmodule
