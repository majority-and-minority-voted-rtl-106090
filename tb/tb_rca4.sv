// tb_rca4: exhaustive self-check of the 4-bit ripple carry adder.
// All 512 combinations of a, b and cin are applied, one every 2.5 ns
// (400 MHz vector rate), and {cout, sum} is compared with a + b + cin
// computed in the testbench.
module tb_rca4;
  timeunit 1ns; timeprecision 1ps;
  import mmr_pkg::*;

  logic [OPW-1:0] a, b, sum;
  logic           cin, cout;
  int checks = 0, failures = 0;

  rca4 dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      {cin, b, a} = 9'(v);
      #2.5;
      checks++;
      if ({cout, sum} !== 5'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d got %0d", a, b, cin, {cout, sum});
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
