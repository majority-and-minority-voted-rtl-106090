// maj3: three-input majority gate (the AO222 complex gate), applied bit by
// bit to W-bit words. y = (a & b) | (b & c) | (c & a): three 2-input ANDs
// into a 3-input OR. In a K-MMR voter it votes on the three outputs of the
// majority cluster and produces Maj. Combinational.
module maj3 #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y
);
  always_comb y = (a & b) | (b & c) | (c & a);
endmodule
