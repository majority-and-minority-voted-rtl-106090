// tb_maj3: self-check of the three-input majority gate. A 1-bit gate is
// checked on all eight input combinations against a count of ones (two or
// more ones give 1); an 8-bit gate is checked on random words bit by bit.
module tb_maj3;
  timeunit 1ns; timeprecision 1ps;

  logic       a1, b1, c1, y1;
  logic [7:0] a8, b8, c8, y8;
  int checks = 0, failures = 0;

  maj3            dut1 (.a(a1), .b(b1), .c(c1), .y(y1));
  maj3 #(.W(8))   dut8 (.a(a8), .b(b8), .c(c8), .y(y8));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a1, b1, c1} = 3'(v);
      #1;
      checks++;
      if (y1 !== ((int'(a1) + int'(b1) + int'(c1)) >= 2)) begin
        failures++;
        $display("FAIL a=%0b b=%0b c=%0b y=%0b", a1, b1, c1, y1);
      end
    end
    for (int n = 0; n < 200; n++) begin
      a8 = 8'($urandom); b8 = 8'($urandom); c8 = 8'($urandom);
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (y8[i] !== ((int'(a8[i]) + int'(b8[i]) + int'(c8[i])) >= 2)) begin
          failures++;
          $display("FAIL bit %0d: %b %b %b -> %b", i, a8[i], b8[i], c8[i], y8[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
