// mmr_voter: the voter of a K-MMR (majority and minority voted redundancy)
// circuit, applied bit by bit to W-bit function unit outputs.
//
// Inputs are the outputs F1..FK of K identical function units; f[0] is F1.
// F1..F3 (majority cluster) go to a 3-input majority gate whose output Maj
// is the reference value. F4..FK (minority cluster) go to a (K-3)-input AND
// gate, output P, and a (K-3)-input OR gate, output Q. A 2:1 multiplexer
// selected by Maj passes P when Maj = 0 and Q when Maj = 1; its output is
// Min. The circuit output is MO = Maj & Min.
//
// The result is correct as long as at least two of the three majority units
// and at least one of the K-3 minority units are correct, so a K-MMR
// tolerates K-3 faulty units. All of this structure follows the paper;
// the bitwise use on multi-bit words, and bringing Maj, P, Q and Min out as
// ports, are this design's choices. Purely combinational, no clock.
module mmr_voter
  import mmr_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT,
  parameter int unsigned W = 1
) (
  input  logic [K-1:0][W-1:0] f,
  output logic [W-1:0]        maj,
  output logic [W-1:0]        p,
  output logic [W-1:0]        q,
  output logic [W-1:0]        min_o,
  output logic [W-1:0]        mo
);
  // A minority cluster needs at least one unit.
  if (K < MAJ_UNITS + 1) begin : g_bad_k
    $error("mmr_voter: K must be at least 4");
  end

  // Majority cluster: 3-input majority (AO222) on F1..F3.
  maj3 #(.W(W)) u_maj (
    .a(f[0]),
    .b(f[1]),
    .c(f[2]),
    .y(maj)
  );

  // Minority cluster: (K-3)-input AND and OR, then the Maj-selected MUX.
  always_comb begin
    p = '1;
    q = '0;
    for (int unsigned k = MAJ_UNITS; k < K; k++) begin
      p &= f[k];
      q |= f[k];
    end
  end

  always_comb begin
    for (int unsigned bt = 0; bt < W; bt++) begin
      min_o[bt] = maj[bt] ? q[bt] : p[bt];
    end
    mo = maj & min_o;
  end
endmodule
