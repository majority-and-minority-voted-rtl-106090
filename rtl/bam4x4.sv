// bam4x4: 4x4 binary array multiplier, the second example function unit.
//
// p = a * b (unsigned, 8 bits). The sixteen partial-product bits
// pp[i][j] = a[j] & b[i] are formed by AND gates. Row 0 is taken as the
// first running sum. Each further row i (1..3) adds partial-product row i
// to the running sum shifted right by one, with a 4-bit ripple of full
// adders; the lowest sum bit of row i is product bit p[i], the other three
// sum bits and the row's carry-out form the next running sum. After row 3
// the running sum gives p[7:4]. Combinational, no clock.
// The paper only names the multiplier; this row-ripple array is the plain
// textbook form of one and is this design's choice.
module bam4x4
  import mmr_pkg::*;
(
  input  logic [OPW-1:0]   a,
  input  logic [OPW-1:0]   b,
  output logic [2*OPW-1:0] p
);
  // pp[i][j] = a[j] & b[i]
  logic [OPW-1:0][OPW-1:0] pp;
  // acc[i]: running sum entering row i+1 (4 bits, already shifted)
  logic [OPW-1:0][OPW-1:0] acc;
  // per-row sums and carries of the adder rows 1..3
  logic [OPW-1:1][OPW-1:0] s;
  logic [OPW-1:1][OPW:0]   c;

  always_comb begin
    for (int i = 0; i < OPW; i++) begin
      for (int j = 0; j < OPW; j++) begin
        pp[i][j] = a[j] & b[i];
      end
    end
  end

  // Row 0: no adders, only the partial products.
  assign p[0]   = pp[0][0];
  assign acc[0] = {1'b0, pp[0][OPW-1:1]};

  for (genvar i = 1; i < OPW; i++) begin : g_row
    assign c[i][0] = 1'b0;
    for (genvar j = 0; j < OPW; j++) begin : g_col
      full_adder u_fa (
        .a  (acc[i-1][j]),
        .b  (pp[i][j]),
        .ci (c[i][j]),
        .sum(s[i][j]),
        .co (c[i][j+1])
      );
    end
    assign p[i]   = s[i][0];
    assign acc[i] = {c[i][OPW], s[i][OPW-1:1]};
  end

  assign p[2*OPW-1:OPW] = acc[OPW-1];
endmodule
