`timescale 1ns/1ps
// input_layer: plays the stored training series into the reservoir, then
// hands the reservoir input over to the fed-back prediction.
//
// Before a run the host writes TRAIN_LEN samples of u(t) into the sample
// memory. A start pulse begins a run: for TRAIN_LEN clock cycles the input
// u is the next stored sample each cycle and mode = 1 (training, the
// reservoir is driven by the data). Then mode drops to 0 for PRED_LEN
// cycles: the surrounding logic feeds the output v back instead of u
// (closed-loop prediction). After that the run ends with a one-cycle done
// pulse and the layer returns to idle, where u = 0 and mode = 1, so the
// reservoir relaxes to its equilibrium under zero input.
//
// step counts the cycles of a run from 0 (first training sample) to
// TRAIN_LEN + PRED_LEN - 1; phase tells training from prediction. A start
// pulse during a run is ignored. Reset (synchronous, active low) returns to
// idle; the sample memory is not cleared.
//
// Ports: clk, rst_n, load_we/load_addr/load_data (host write port of the
// sample memory), start, u (M bits, held for one clock period), mode, phase,
// step, done. Timing: u, mode and phase change right after a rising edge;
// the first sample is applied in the cycle after the edge that sees start.
module input_layer
  import rc_pkg::*;
#(
  parameter int unsigned M         = rc_pkg::RC_U_BITS,
  parameter int unsigned TRAIN_LEN = rc_pkg::RC_TRAIN_LEN,
  parameter int unsigned PRED_LEN = rc_pkg::RC_PRED_LEN,
  localparam int unsigned AW = $clog2(TRAIN_LEN),
  localparam int unsigned SW = $clog2(TRAIN_LEN + PRED_LEN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load_we,
  input  logic [AW-1:0] load_addr,
  input  logic [M-1:0]  load_data,
  input  logic          start,
  output logic [M-1:0]  u,
  output logic          mode,
  output rc_phase_e     phase,
  output logic [SW-1:0] step,
  output logic          done
);

  localparam logic [SW-1:0] LAST_TRAIN = SW'(TRAIN_LEN - 1);
  localparam logic [SW-1:0] LAST_STEP  = SW'(TRAIN_LEN + PRED_LEN - 1);

  logic [M-1:0] samples [TRAIN_LEN];

  always_ff @(posedge clk) begin
    if (load_we && int'(load_addr) < int'(TRAIN_LEN)) samples[load_addr] <= load_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase <= RC_IDLE;
      step  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        RC_IDLE: begin
          step <= '0;
          if (start) phase <= RC_TRAIN;
        end
        RC_TRAIN: begin
          step <= step + 1'b1;
          if (step == LAST_TRAIN) phase <= (PRED_LEN > 0) ? RC_PREDICT : RC_IDLE;
          if (step == LAST_TRAIN && PRED_LEN == 0) done <= 1'b1;
        end
        RC_PREDICT: begin
          step <= step + 1'b1;
          if (step == LAST_STEP) begin
            phase <= RC_IDLE;
            done  <= 1'b1;
          end
        end
        default: phase <= RC_IDLE;
      endcase
    end
  end

  assign mode = (phase != RC_PREDICT);
  assign u    = (phase == RC_TRAIN) ? samples[AW'(step)] : '0;

endmodule
