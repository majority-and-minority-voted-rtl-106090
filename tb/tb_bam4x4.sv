// tb_bam4x4: exhaustive self-check of the 4x4 array multiplier.
// All 256 operand pairs are applied, one every 2.5 ns, and p is compared
// with a * b computed in the testbench.
module tb_bam4x4;
  timeunit 1ns; timeprecision 1ps;
  import mmr_pkg::*;

  logic [OPW-1:0]   a, b;
  logic [2*OPW-1:0] p;
  int checks = 0, failures = 0;

  bam4x4 dut (.a(a), .b(b), .p(p));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      {b, a} = 8'(v);
      #2.5;
      checks++;
      if (p !== 8'(int'(a) * int'(b))) begin
        failures++;
        $display("FAIL a=%0d b=%0d got %0d", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
