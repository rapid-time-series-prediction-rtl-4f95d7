`timescale 1ns/1ps
// state_recorder_tb: records 20 random {x, v} entries (with gaps where
// rec_en is low), then reads every address back and checks the data one
// cycle after the address, and that disabled cycles wrote nothing.
module state_recorder_tb;
  localparam int N = 10, M = 8, DEPTH = 20;
  int checks = 0, failures = 0;

  logic clk = 0, rec_en = 0;
  logic [4:0] rec_addr = '0, rd_addr = '0;
  logic [N-1:0] x_in = '0, rd_x;
  logic [M-1:0] v_in = '0, rd_v;
  logic [N-1:0] rx [DEPTH];
  logic [M-1:0] rv [DEPTH];

  always #3.125 clk = ~clk;

  state_recorder #(.N(N), .M(M), .DEPTH(DEPTH)) dut (.*);

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

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      rec_en = 1; rec_addr = 5'(a); x_in = N'($urandom); v_in = M'($urandom);
      rx[a] = x_in; rv[a] = v_in;
      @(negedge clk);
      // a disabled cycle with other data on the same address
      rec_en = 0; x_in = ~x_in; v_in = ~v_in;
      @(negedge clk);
    end
    for (int a = 0; a < DEPTH; a++) begin
      rd_addr = 5'(a);
      @(posedge clk); #1;
      check(rd_x == rx[a] && rd_v == rv[a], $sformatf("entry %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
