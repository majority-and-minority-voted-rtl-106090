// tb_mmr_voter: self-check of the K-MMR voter for K = 4, 5, 6 and 7.
//
// For each K a 1-bit voter is driven with all 2^K combinations of F1..FK.
// Maj is checked against a count of ones among F1..F3, P and Q against
// "all of F4..FK are 1" and "any of F4..FK is 1", Min against the MUX rule
// (P when Maj = 0, Q when Maj = 1) and MO against Maj & Min.
// Independently of that structure, the fault-tolerance claim is checked:
// for a correct value v and every fault pattern with at most one wrong unit
// in the majority cluster and at least one correct unit in the minority
// cluster, MO must equal v. Counting, for every number n of working units,
// the fault patterns after which MO is right for both values of v gives the
// coefficients of the K-MMR reliability polynomials (3R^3(1-R) + R^4 for
// K = 4, 6R^3(1-R)^2 + 5R^4(1-R) + R^5 for K = 5, and so on); these are
// checked too. The rows of the scenario table (K = 5) are
// replayed, and an 8-bit voter (K = 5) is checked bit by bit on random
// words with random tolerable faults.
module tb_mmr_voter;
  timeunit 1ns; timeprecision 1ps;

  int checks = 0, failures = 0;
  int tolerated = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- exhaustive 1-bit voters, K = 4..7 ----------------
  localparam int NK = 4;
  bit done [NK];

  for (genvar gk = 0; gk < NK; gk++) begin : g_k
    localparam int K = 4 + gk;
    logic [K-1:0][0:0] f;
    logic maj, p, q, min_o, mo;

    mmr_voter #(.K(K), .W(1)) dut (
      .f(f), .maj(maj), .p(p), .q(q), .min_o(min_o), .mo(mo)
    );

    // survive[n]: fault patterns with n working units that the voter
    // survives; compared with the coefficients of the reliability
    // polynomial, sum over n of C[n] * R^n * (1-R)^(K-n).
    int survive [8];
    int coeff [8];

    initial begin
      foreach (survive[n]) survive[n] = 0;
      foreach (coeff[n]) coeff[n] = 0;
      case (K)
        4: begin coeff[3] = 3;  coeff[4] = 1; end
        5: begin coeff[3] = 6;  coeff[4] = 5;  coeff[5] = 1; end
        6: begin coeff[3] = 9;  coeff[4] = 12; coeff[5] = 6;  coeff[6] = 1; end
        default: begin
          coeff[3] = 12; coeff[4] = 22; coeff[5] = 18; coeff[6] = 7; coeff[7] = 1;
        end
      endcase
      for (int v = 0; v < (1 << K); v++) begin
        int ones_maj, ones_min;
        bit e_maj, e_p, e_q, e_min;
        for (int i = 0; i < K; i++) f[i] = 1'((v >> i) & 1);
        #1;
        ones_maj = 0; ones_min = 0;
        for (int i = 0; i < 3; i++) ones_maj += int'(f[i]);
        for (int i = 3; i < K; i++) ones_min += int'(f[i]);
        e_maj = (ones_maj >= 2);
        e_p   = (ones_min == K - 3);
        e_q   = (ones_min >= 1);
        e_min = e_maj ? e_q : e_p;
        check(maj == e_maj, $sformatf("K=%0d f=%b maj=%b", K, f, maj));
        check(p == e_p,     $sformatf("K=%0d f=%b p=%b", K, f, p));
        check(q == e_q,     $sformatf("K=%0d f=%b q=%b", K, f, q));
        check(min_o == e_min, $sformatf("K=%0d f=%b min=%b", K, f, min_o));
        check(mo == (e_maj & e_min), $sformatf("K=%0d f=%b mo=%b", K, f, mo));
        // Reliability count: with bit i of v meaning "unit i is faulty"
        // (a faulty 1-bit unit gives the inverted value), count the
        // patterns for which MO is right for both correct values, by the
        // number of working units.
        begin
          bit ok_both;
          ok_both = 1'b1;
          for (int cv = 0; cv < 2; cv++) begin
            for (int i = 0; i < K; i++) f[i] = 1'(cv) ^ 1'((v >> i) & 1);
            #1;
            if (mo != 1'(cv)) ok_both = 1'b0;
          end
          if (ok_both) survive[K - $countones(K'(v))]++;
        end
        // Fault tolerance: treat bit i of v as "unit i is faulty" and
        // derive the unit outputs from a correct value.
        for (int cv = 0; cv < 2; cv++) begin
          int bad_maj, bad_min;
          bad_maj = 0; bad_min = 0;
          for (int i = 0; i < 3; i++) bad_maj += (v >> i) & 1;
          for (int i = 3; i < K; i++) bad_min += (v >> i) & 1;
          if (bad_maj <= 1 && bad_min <= K - 4) begin
            for (int i = 0; i < K; i++) f[i] = 1'(cv) ^ 1'((v >> i) & 1);
            #1;
            tolerated++;
            check(mo == 1'(cv), $sformatf("K=%0d correct=%0d faulty=%b mo=%b",
                                          K, cv, K'(v), mo));
          end
        end
      end
      for (int n = 0; n <= K; n++)
        check(survive[n] == coeff[n],
              $sformatf("K=%0d: %0d surviving patterns with %0d working units, expected %0d",
                        K, survive[n], n, coeff[n]));
      done[gk] = 1'b1;
    end
  end

  // ---------------- scenario table rows, K = 5 ----------------
  // Columns F1 F2 F3 F4 F5, then expected Maj, Min, MO. "0 - 1" in the
  // minority columns is taken as F4 = 0, F5 = 1, and "1 - 0" as F4 = 1,
  // F5 = 0.
  logic [4:0][0:0] tf;
  logic tmaj, tp, tq, tmin, tmo;
  mmr_voter #(.K(5), .W(1)) dut_tab (
    .f(tf), .maj(tmaj), .p(tp), .q(tq), .min_o(tmin), .mo(tmo)
  );

  // each row: {F1,F2,F3,F4,F5, Maj, Min, MO}
  localparam logic [7:0] TABLE [8] = '{
    8'b00000_000, 8'b11111_111,
    8'b00101_000, 8'b01001_000, 8'b10001_000,
    8'b11010_111, 8'b10110_111, 8'b01110_111
  };

  // ---------------- 8-bit voter, K = 5, random ----------------
  logic [4:0][7:0] wf;
  logic [7:0] wmaj, wp, wq, wmin, wmo;
  mmr_voter #(.K(5), .W(8)) dut_w (
    .f(wf), .maj(wmaj), .p(wp), .q(wq), .min_o(wmin), .mo(wmo)
  );

  initial begin
    for (int r = 0; r < 8; r++) begin
      {tf[0], tf[1], tf[2], tf[3], tf[4]} = TABLE[r][7:3];
      #1;
      check({tmaj, tmin, tmo} == TABLE[r][2:0],
            $sformatf("table row %0d: maj=%b min=%b mo=%b", r, tmaj, tmin, tmo));
    end
    for (int n = 0; n < 500; n++) begin
      logic [7:0] good;
      int fm, fn;
      good = 8'($urandom);
      for (int i = 0; i < 5; i++) wf[i] = good;
      fm = int'($urandom_range(0, 3));   // 3 = no majority fault
      fn = int'($urandom_range(3, 4));   // one of the two minority units
      if (fm < 3) wf[fm] = good ^ 8'($urandom_range(1, 255));
      wf[fn] = good ^ 8'($urandom_range(1, 255));
      #1;
      check(wmo == good, $sformatf("8-bit: good=%h f=%h mo=%h", good, wf, wmo));
    end
    wait (done[0] && done[1] && done[2] && done[3]);
    if (tolerated == 0) check(1'b0, "no tolerable fault pattern applied");
    $display("tolerable fault patterns applied: %0d", tolerated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
