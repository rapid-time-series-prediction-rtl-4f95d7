`timescale 1ns/1ps
// input_layer_tb: loads 8 samples, runs two complete runs of 8 training and
// 5 prediction cycles, and checks u, mode, phase, step and done on every
// cycle against the schedule: sample c in training cycle c, mode 0 for the
// 5 prediction cycles, done one cycle after the last, zero input in idle.
// A start pulse in the middle of a run must be ignored; a write during a
// run lands in the memory for the next run.
module input_layer_tb;
  import rc_pkg::*;
  localparam int TL = 8, PL = 5, M = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, load_we = 0, start = 0;
  logic [2:0] load_addr = '0;
  logic [M-1:0] load_data = '0, u;
  logic mode, done;
  rc_phase_e phase;
  logic [3:0] step;
  logic [M-1:0] ref_mem [TL];

  always #3.125 clk = ~clk;

  input_layer #(.M(M), .TRAIN_LEN(TL), .PRED_LEN(PL)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    #5000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic run(input bit poke_start);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int c = 0; c < TL + PL; c++) begin
      bit tr;
      tr = (c < TL);
      check(phase == (tr ? RC_TRAIN : RC_PREDICT), $sformatf("phase in cycle %0d", c));
      check(mode == tr, $sformatf("mode in cycle %0d", c));
      check(int'(step) == c, $sformatf("step in cycle %0d", c));
      check(u == (tr ? ref_mem[c] : '0), $sformatf("u in cycle %0d", c));
      check(done == 0, "no done during the run");
      if (poke_start && c == 3) start = 1;
      if (c == 10) begin load_we = 1; load_addr = 3'd2; load_data = 8'h5a; ref_mem[2] = 8'h5a; end
      @(negedge clk);
      start = 0; load_we = 0;
    end
    check(done == 1 && phase == RC_IDLE && mode == 1, "done pulse and idle after the run");
    @(negedge clk);
    check(done == 0 && u == '0, "done is one cycle, idle input is zero");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(phase == RC_IDLE && mode == 1 && u == '0 && done == 0, "idle after reset");
    for (int t = 0; t < TL; t++) begin
      ref_mem[t] = 8'($urandom);
      load_we = 1; load_addr = 3'(t); load_data = ref_mem[t];
      @(negedge clk);
    end
    load_we = 0;
    repeat (3) @(negedge clk);
    check(phase == RC_IDLE, "stays idle without start");
    run(1);
    repeat (2) @(negedge clk);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
