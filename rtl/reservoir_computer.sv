`timescale 1ns/1ps
// reservoir_computer: a reservoir computer for real-time time-series
// prediction, with an unclocked Boolean reservoir and a clocked input and
// output layer.
//
// Data path, one clock period per sample:
//   input_layer --u--> [mode mux] --u_v--> random_reservoir --x (async)-->
//   x_reg (sampled every rising edge) --> output_layer --v--> v_reg
// and v_reg goes back to the mode mux. While mode = 1 (training) the stored
// samples drive the reservoir; while mode = 0 (prediction) v_reg does, so
// the whole system runs as an autonomous model of the series, producing one
// prediction per clock period. The output layer also sees u_v directly (the
// direct input-to-output connection). Every cycle of a run, x_reg and v_reg
// are written to the state recorder.
//
// Cycle c of a run (step = c) starts at a rising edge. During it u_v is
// sample c (training) or v_reg (prediction), x_reg holds x as sampled at
// the start of the cycle, and output_layer computes
//   v = W_out * x_reg + w_direct * u_v,
// which v_reg takes at the end of the cycle: it is the prediction of the
// input of cycle c+1. Recorder entry c holds {x_reg, v_reg} of cycle c.
//
// Following the original design, the feedback mux selects the registered
// output v_reg. (Its listing selects the combinational v, which would close
// a zero-delay loop through the direct connection; its text says the output
// is registered and held constant over a clock period, which is what is
// built here.) The reset of x_reg and v_reg, the host ports and the state
// recorder are this design's choices.
//
// Timing: the reservoir output x is asynchronous to clk; in silicon x_reg
// samples it without synchronisation, as the original does (a metastable
// sample only perturbs one feature of one cycle). The clock period must
// cover the output layer's adder tree (6.25 ns, 160 MHz, on the FPGA the
// design was first built for).
//
// Ports: clk, rst_n (synchronous, active low); start (begins a run);
// u_we/u_addr/u_wdata (load the training samples); w_we/w_addr/w_wdata
// (load the output weights, address N = direct weight); rd_addr/rd_x/rd_v
// (read the recorder, one cycle latency); u_v, v, x_q, mode, phase, step,
// done, v_saturated (status and observation).
module reservoir_computer
  import rc_pkg::*;
#(
  parameter int unsigned N          = rc_pkg::RC_N_NODES,
  parameter int unsigned K          = rc_pkg::RC_K_IN,
  parameter int unsigned M          = rc_pkg::RC_U_BITS,
  parameter int unsigned SEED       = 1,
  parameter real         RHO_T      = rc_pkg::RC_RHO,
  parameter real         SIGMA_T    = rc_pkg::RC_SIGMA,
  parameter real         TAU_BAR_NS_T = rc_pkg::RC_TAU_BAR_NS,
  parameter real         TINV_NS_T  = rc_pkg::RC_TINV_NS,
  parameter int unsigned TRAIN_LEN = rc_pkg::RC_TRAIN_LEN,
  parameter int unsigned PRED_LEN = rc_pkg::RC_PRED_LEN,
  localparam int unsigned DEPTH = TRAIN_LEN + PRED_LEN,
  localparam int unsigned UAW   = $clog2(TRAIN_LEN),
  localparam int unsigned WAW   = $clog2(N + 1),
  localparam int unsigned RAW   = $clog2(DEPTH),
  localparam int unsigned SW    = $clog2(DEPTH + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            u_we,
  input  logic [UAW-1:0]  u_addr,
  input  logic [M-1:0]    u_wdata,
  input  logic            w_we,
  input  logic [WAW-1:0]  w_addr,
  input  logic [2*M-1:0]  w_wdata,
  input  logic [RAW-1:0]  rd_addr,
  output logic [N-1:0]    rd_x,
  output logic [M-1:0]    rd_v,
  output logic [M-1:0]    u_v,
  output logic [M-1:0]    v,
  output logic [N-1:0]    x_q,
  output logic            mode,
  output rc_phase_e       phase,
  output logic [SW-1:0]   step,
  output logic            done,
  output logic            v_saturated
);

  logic [M-1:0]           u;
  logic [2*M*(N+1)-1:0]   w_out;
  logic [N-1:0]           x;
  logic [N-1:0]           x_reg;
  logic signed [M-1:0]    v_comb;
  logic [M-1:0]           v_reg;

  input_layer #(.M(M), .TRAIN_LEN(TRAIN_LEN), .PRED_LEN(PRED_LEN)) u_input (
    .clk, .rst_n,
    .load_we(u_we), .load_addr(u_addr), .load_data(u_wdata),
    .start,
    .u, .mode, .phase, .step, .done
  );

  weight_store #(.N(N), .M(M)) u_weights (
    .clk, .rst_n,
    .we(w_we), .waddr(w_addr), .wdata(w_wdata),
    .w_out
  );

  assign u_v = mode ? u : v_reg;

  random_reservoir #(
    .N(N), .K(K), .B(M), .SEED(SEED),
    .RHO_T(RHO_T), .SIGMA_T(SIGMA_T),
    .TAU_BAR_NS_T(TAU_BAR_NS_T), .TINV_NS_T(TINV_NS_T)
  ) u_reservoir (
    .u(u_v),
    .x
  );

  output_layer #(.N(N), .M(M)) u_output (
    .w_out, .u_v(u_v), .x_reg, .v(v_comb), .saturated(v_saturated)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_reg <= '0;
      v_reg <= '0;
    end else begin
      x_reg <= x;
      v_reg <= v_comb;
    end
  end

  state_recorder #(.N(N), .M(M), .DEPTH(DEPTH)) u_recorder (
    .clk,
    .rec_en(phase != RC_IDLE), .rec_addr(RAW'(step)),
    .x_in(x_reg), .v_in(v_reg),
    .rd_addr, .rd_x, .rd_v
  );

  assign v   = v_reg;
  assign x_q = x_reg;

endmodule
