// mmr_top: the two example K-MMR circuits side by side.
//
// One K-MMR built from 4-bit ripple carry adders and one built from 4x4
// array multipliers. They are independent circuits; here they share the
// operand inputs a and b so that one stimulus exercises both (cin is used
// by the adder only). Each reports its protected output MO and its voter's
// internal Maj and Min. Purely combinational: apply operands, read the
// outputs after the settle time. K defaults to 5 (5-MMR).
module mmr_top
  import mmr_pkg::*;
#(
  parameter int unsigned K = K_DEFAULT
) (
  input  logic [OPW-1:0]       a,
  input  logic [OPW-1:0]       b,
  input  logic                 cin,
  output logic [RCA_OUT_W-1:0] rca_mo,
  output logic [RCA_OUT_W-1:0] rca_maj,
  output logic [RCA_OUT_W-1:0] rca_min,
  output logic [BAM_OUT_W-1:0] bam_mo,
  output logic [BAM_OUT_W-1:0] bam_maj,
  output logic [BAM_OUT_W-1:0] bam_min
);
  fu_in_t in;

  assign in = '{a: a, b: b, cin: cin};

  mmr_k #(.K(K), .FU(FU_RCA4)) u_rca (
    .in   (in),
    .mo   (rca_mo),
    .maj  (rca_maj),
    .min_o(rca_min)
  );

  mmr_k #(.K(K), .FU(FU_BAM4X4)) u_bam (
    .in   (in),
    .mo   (bam_mo),
    .maj  (bam_maj),
    .min_o(bam_min)
  );
endmodule
