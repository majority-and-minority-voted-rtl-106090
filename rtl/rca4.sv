// rca4: 4-bit ripple carry adder, the first example function unit.
//
// Four full adders in a chain; the carry of bit i feeds bit i+1, so the
// critical path runs through all four carry stages. The function unit's
// output word is {cout, sum[3:0]} (5 bits). Combinational, no clock.
// A carry-in input is this design's choice; tie it to 0 for a plain
// 4-bit + 4-bit adder.
module rca4
  import mmr_pkg::*;
(
  input  logic [OPW-1:0] a,
  input  logic [OPW-1:0] b,
  input  logic           cin,
  output logic [OPW-1:0] sum,
  output logic           cout
);
  logic [OPW:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < OPW; i++) begin : g_bit
    full_adder u_fa (
      .a  (a[i]),
      .b  (b[i]),
      .ci (c[i]),
      .sum(sum[i]),
      .co (c[i+1])
    );
  end

  assign cout = c[OPW];
endmodule
