// mmr_k: a complete K-MMR circuit, K identical function units and their
// voter.
//
// Every unit receives the same operands. Units 1..3 form the majority
// cluster and units 4..K the minority cluster; their outputs F1..FK go to
// mmr_voter, which returns the protected output MO together with the
// internal voter signals Maj and Min. FU selects the kind of function unit
// (4-bit ripple carry adder or 4x4 array multiplier); the output width W
// follows from it (5 bits for the adder, {cout, sum}; 8 bits for the
// multiplier); a multiplier circuit leaves in.cin unused, which lint
// reports as an unused bit. Each unit's output is held in the net
// g_fu[i].y, which is where a simulation injects a unit fault. The circuit is combinational:
// MO settles one function-unit delay plus one voter delay after the
// operands change. Grouping and voter follow the paper; the choice of
// function unit kinds as a parameter is this design's.
module mmr_k
  import mmr_pkg::*;
#(
  parameter int unsigned K  = K_DEFAULT,
  parameter fu_kind_e    FU = FU_RCA4,
  localparam int unsigned W = fu_out_width(FU)
) (
  input  fu_in_t        in,
  output logic [W-1:0]  mo,
  output logic [W-1:0]  maj,
  output logic [W-1:0]  min_o
);
  logic [K-1:0][W-1:0] f;

  for (genvar i = 0; i < K; i++) begin : g_fu
    wire logic [W-1:0] y;
    if (FU == FU_RCA4) begin : g_rca
      rca4 u_unit (
        .a   (in.a),
        .b   (in.b),
        .cin (in.cin),
        .sum (y[OPW-1:0]),
        .cout(y[OPW])
      );
    end else begin : g_bam
      bam4x4 u_unit (
        .a(in.a),
        .b(in.b),
        .p(y)
      );
    end
    assign f[i] = y;
  end

  logic [W-1:0] p_unused, q_unused;

  mmr_voter #(.K(K), .W(W)) u_voter (
    .f    (f),
    .maj  (maj),
    .p    (p_unused),
    .q    (q_unused),
    .min_o(min_o),
    .mo   (mo)
  );
endmodule
