`timescale 1ns/1ps
// delay_line_tb: checks that a chain of 5 inverter pairs delays a signal by
// 10 inverter delays (1.9 ns with 0.19 ns inverters) without inverting it,
// for single steps and for a random pulse train whose pulses are longer
// than the chain delay, and that a 1-pair chain delays by 0.38 ns.
module delay_line_tb;
  int checks = 0, failures = 0;
  logic a = 0, y5, y1;

  delay_line #(.M(5), .TINV_NS(0.19)) u5 (.delay_in(a), .delay_out(y5));
  delay_line #(.M(1), .TINV_NS(0.19)) u1 (.delay_in(a), .delay_out(y1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $realtime, what); end
  endtask


  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #10;
    check(y5 == a && y1 == a, "settled output equals input");
    for (int k = 0; k < 60; k++) begin
      real hold;
      a = ~a;
      #0.375 check(y1 == ~a, "1-pair output still old 0.375 ns after the edge");
      #0.01  check(y1 == a, "1-pair output new 0.385 ns after the edge");
      #1.51  check(y5 == ~a, "5-pair output still old 1.895 ns after the edge");
      #0.01  check(y5 == a, "5-pair output new 1.905 ns after the edge");
      hold = 0.05 + ($urandom % 4000) / 1000.0;
      #(hold);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
