// mmr_pkg: types and constants shared by the majority and minority voted
// redundancy (MMR) RTL.
//
// A K-MMR circuit holds K identical function units. Units 1..3 form the
// majority cluster, units 4..K the minority cluster; the cluster split of
// three is fixed by the scheme, only the minority cluster grows with K.
// Two kinds of function unit are provided, matching the two example circuits
// the scheme is usually demonstrated with: a 4-bit ripple carry adder and a
// 4x4 binary array multiplier. Both take two 4-bit operands; the adder also
// takes a carry-in (a choice of this RTL).
package mmr_pkg;

  // Size of the majority cluster: fixed at three by the scheme.
  localparam int unsigned MAJ_UNITS = 3;

  // Default number of function units (5-MMR). 6 and 7 are the other
  // configurations of interest; any K >= 4 is legal.
  localparam int unsigned K_DEFAULT = 5;

  // Operand width of both example function units.
  localparam int unsigned OPW = 4;

  // Output widths: the adder gives {cout, sum[3:0]}, the multiplier p[7:0].
  localparam int unsigned RCA_OUT_W = OPW + 1;
  localparam int unsigned BAM_OUT_W = 2 * OPW;

  typedef enum logic [0:0] {
    FU_RCA4   = 1'b0,   // 4-bit ripple carry adder
    FU_BAM4X4 = 1'b1    // 4x4 binary array multiplier
  } fu_kind_e;

  // Output width of a function unit of the given kind.
  function automatic int unsigned fu_out_width(fu_kind_e kind);
    return (kind == FU_RCA4) ? RCA_OUT_W : BAM_OUT_W;
  endfunction

  // Operands applied identically to every function unit.
  typedef struct packed {
    logic [OPW-1:0] a;
    logic [OPW-1:0] b;
    logic           cin;   // used by the adder only
  } fu_in_t;

endpackage
