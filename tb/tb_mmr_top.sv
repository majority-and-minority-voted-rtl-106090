// tb_mmr_top: end-to-end test of both example circuits at their default
// size (5-MMR of 4-bit ripple carry adders, 5-MMR of 4x4 array
// multipliers).
//
// All 512 distinct operand vectors (a, b, cin) are applied, one per 2.5 ns
// step (400 MHz) per fault condition, each under four fault conditions, applied identically
// to both circuits:
//   clean     - no faulty unit (all units and both clusters agree)
//   majority  - one random majority-cluster unit wrong
//   minority  - random minority-cluster units wrong, one kept correct
//   maximum   - K-3 units wrong at once: one majority unit and all but one
//               minority unit
// A wrong unit's output net is forced to the correct word XOR a random
// non-zero mask. In every case MO must equal a + b + cin (adder) and a * b
// (multiplier), computed here. The testbench also counts, from the voters'
// internal nets, the voter situations the scheme distinguishes: a masked
// majority-cluster disagreement, a minority cluster whose AND and OR
// differ while Maj = 0 (Min takes P) and while Maj = 1 (Min takes Q).
// Each condition and situation must occur at least once.
module tb_mmr_top;
  timeunit 1ns; timeprecision 1ps;
  import mmr_pkg::*;

  localparam int K  = K_DEFAULT;
  localparam int WA = RCA_OUT_W;
  localparam int WM = BAM_OUT_W;

  logic [OPW-1:0] a, b;
  logic           cin;
  logic [WA-1:0]  rca_mo, rca_maj, rca_min;
  logic [WM-1:0]  bam_mo, bam_maj, bam_min;

  mmr_top dut (
    .a(a), .b(b), .cin(cin),
    .rca_mo(rca_mo), .rca_maj(rca_maj), .rca_min(rca_min),
    .bam_mo(bam_mo), .bam_maj(bam_maj), .bam_min(bam_min)
  );

  int checks = 0, failures = 0;
  int n_clean = 0, n_majority = 0, n_minority = 0, n_maximum = 0;
  int n_maj_masked = 0, n_min_takes_p = 0, n_min_takes_q = 0;

  logic [K-1:0]          bad;
  logic [K-1:0][WA-1:0]  a_val;
  logic [K-1:0][WM-1:0]  m_val;
  event                  apply_faults;

  for (genvar i = 0; i < K; i++) begin : g_inj
    always @(apply_faults) begin
      if (bad[i]) begin
        force dut.u_rca.g_fu[i].y = a_val[i];
        force dut.u_bam.g_fu[i].y = m_val[i];
      end else begin
        release dut.u_rca.g_fu[i].y;
        release dut.u_bam.g_fu[i].y;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Count voter situations bit by bit from the internal nets.
  task automatic observe();
    logic [WA-1:0] ap, aq, am;
    logic [WM-1:0] mp, mq, mm;
    logic [2:0]    f3a;
    ap = dut.u_rca.u_voter.p; aq = dut.u_rca.u_voter.q; am = dut.u_rca.u_voter.maj;
    mp = dut.u_bam.u_voter.p; mq = dut.u_bam.u_voter.q; mm = dut.u_bam.u_voter.maj;
    for (int i = 0; i < WA; i++) begin
      f3a = {dut.u_rca.f[2][i], dut.u_rca.f[1][i], dut.u_rca.f[0][i]};
      if (f3a != 3'b000 && f3a != 3'b111) n_maj_masked++;
      if (ap[i] != aq[i]) begin
        if (am[i]) n_min_takes_q++; else n_min_takes_p++;
      end
    end
    for (int i = 0; i < WM; i++) begin
      if (mp[i] != mq[i]) begin
        if (mm[i]) n_min_takes_q++; else n_min_takes_p++;
      end
    end
  endtask

  // Choose a fault pattern for the given condition.
  function automatic logic [K-1:0] pattern(int cond);
    logic [K-1:0] p = '0;
    int keep = int'($urandom_range(3, K - 1));
    case (cond)
      1: p[$urandom_range(0, 2)] = 1'b1;
      2: begin
        for (int i = 3; i < K; i++)
          if (i != keep && $urandom_range(0, 1) == 1) p[i] = 1'b1;
        if (p == '0 && K > 4) p[keep == 3 ? 4 : 3] = 1'b1;
      end
      3: begin
        p[$urandom_range(0, 2)] = 1'b1;
        for (int i = 3; i < K; i++) if (i != keep) p[i] = 1'b1;
      end
      default: ;
    endcase
    return p;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bad = '0; a_val = '0; m_val = '0;
    for (int v = 0; v < 512; v++) begin
      logic [WA-1:0] sum_ref;
      logic [WM-1:0] prod_ref;
      {cin, b, a} = 9'(v);
      sum_ref  = WA'(int'(a) + int'(b) + int'(cin));
      prod_ref = WM'(int'(a) * int'(b));
      for (int cond = 0; cond < 4; cond++) begin
        // Release every unit before the forced values change, then
        // force the new pattern.
        bad = '0;
        ->apply_faults;
        #0.5;
        for (int i = 0; i < K; i++) begin
          a_val[i] = sum_ref  ^ WA'($urandom_range(1, (1 << WA) - 1));
          m_val[i] = prod_ref ^ WM'($urandom_range(1, (1 << WM) - 1));
        end
        bad = pattern(cond);
        ->apply_faults;
        #2.0;
        observe();
        case (cond)
          0: n_clean++;
          1: n_majority++;
          2: if (bad != '0) n_minority++;
          3: if ($countones(bad) == K - 3) n_maximum++;
          default: ;
        endcase
        check(rca_mo == sum_ref,
              $sformatf("adder a=%0d b=%0d cin=%0d faulty=%b mo=%0d", a, b, cin, bad, rca_mo));
        check(bam_mo == prod_ref,
              $sformatf("mult a=%0d b=%0d faulty=%b mo=%0d", a, b, bad, bam_mo));
        if (cond == 0) begin
          check(rca_maj == sum_ref && rca_min == sum_ref, "clean adder Maj/Min");
          check(bam_maj == prod_ref && bam_min == prod_ref, "clean mult Maj/Min");
        end
      end
    end
    $display("conditions: clean=%0d majority=%0d minority=%0d maximum=%0d",
             n_clean, n_majority, n_minority, n_maximum);
    $display("voter: majority disagreement masked=%0d, Min=P with P!=Q=%0d, Min=Q with P!=Q=%0d",
             n_maj_masked, n_min_takes_p, n_min_takes_q);
    check(n_clean > 0,       "clean condition never applied");
    check(n_majority > 0,    "majority-cluster fault never applied");
    check(n_minority > 0,    "minority-cluster fault never applied");
    check(n_maximum > 0,     "maximum tolerable fault count never applied");
    check(n_maj_masked > 0,  "majority disagreement never occurred");
    check(n_min_takes_p > 0, "Min never selected P with P != Q");
    check(n_min_takes_q > 0, "Min never selected Q with P != Q");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
