`timescale 1ns/1ps
// weight_store_tb: writes random weights to all N+1 = 7 addresses, checks
// the flattened output after every write, checks that an address above N
// changes nothing and that reset clears all weights.
module weight_store_tb;
  localparam int N = 6, M = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, we = 0;
  logic [2:0] waddr = '0;
  logic [2*M-1:0] wdata = '0;
  logic [2*M*(N+1)-1:0] w_out;
  logic [2*M-1:0] ref_w [N+1];

  always #3.125 clk = ~clk;

  weight_store #(.N(N), .M(M)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic compare(input string what);
    for (int i = 0; i <= N; i++)
      check(w_out[2*M*i +: 2*M] == ref_w[i], $sformatf("%s: weight %0d", what, i));
  endtask

  initial begin
    #5000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    foreach (ref_w[i]) ref_w[i] = '0;
    repeat (2) @(negedge clk);
    compare("after reset");
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      int a;
      a = $urandom % (N + 1);
      we = 1; waddr = 3'(a); wdata = 16'($urandom);
      @(negedge clk);
      ref_w[a] = wdata; we = 0;
      compare($sformatf("after write %0d", r));
    end
    we = 1; waddr = 3'd7; wdata = 16'hffff;
    @(negedge clk); we = 0;
    compare("write above N ignored");
    rst_n = 0;
    @(negedge clk); rst_n = 1;
    foreach (ref_w[i]) ref_w[i] = '0;
    compare("after second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
