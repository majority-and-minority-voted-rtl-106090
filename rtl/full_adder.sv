// full_adder: one-bit full adder, the cell both example function units are
// built from. sum = a ^ b ^ ci, co = majority(a, b, ci). Purely
// combinational, no clock. The units are only named by the MMR scheme;
// building both from this common cell is this design's choice.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic sum,
  output logic co
);
  always_comb begin
    sum = a ^ b ^ ci;
    co  = (a & b) | (b & ci) | (a & ci);
  end
endmodule
