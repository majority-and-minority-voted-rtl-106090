// tb_mmr_sweep: the 6-MMR and 7-MMR configurations of both example
// circuits (the counterparts of 7-way and 9-way modular redundancy).
//
// For K = 6 and K = 7 a full mmr_top is built. All 512 operand vectors are
// applied, each once fault-free and once with the largest tolerable fault
// set: K-3 wrong units, i.e. one majority-cluster unit and all minority
// units but one, chosen at random. A wrong unit's output net is forced to
// the correct word XOR a random non-zero mask. MO must equal a + b + cin
// and a * b, computed here. Each configuration must see its maximum fault
// count at least once.
module tb_mmr_sweep;
  timeunit 1ns; timeprecision 1ps;
  import mmr_pkg::*;

  localparam int WA = RCA_OUT_W;
  localparam int WM = BAM_OUT_W;
  localparam int NCFG = 2;

  int checks = 0, failures = 0;
  bit done [NCFG];
  int n_max [NCFG];

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

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int K = 6 + g;

    logic [OPW-1:0] a, b;
    logic           cin;
    logic [WA-1:0]  rca_mo, rca_maj, rca_min;
    logic [WM-1:0]  bam_mo, bam_maj, bam_min;

    mmr_top #(.K(K)) dut (
      .a(a), .b(b), .cin(cin),
      .rca_mo(rca_mo), .rca_maj(rca_maj), .rca_min(rca_min),
      .bam_mo(bam_mo), .bam_maj(bam_maj), .bam_min(bam_min)
    );

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

    initial begin
      n_max[g] = 0;
      bad = '0; a_val = '0; m_val = '0;
      for (int v = 0; v < 512; v++) begin
        logic [WA-1:0] sum_ref;
        logic [WM-1:0] prod_ref;
        {cin, b, a} = 9'(v);
        sum_ref  = WA'(int'(a) + int'(b) + int'(cin));
        prod_ref = WM'(int'(a) * int'(b));
        for (int cond = 0; cond < 2; cond++) begin
          int keep;
          bad = '0;
          ->apply_faults;
          #0.5;
          for (int i = 0; i < K; i++) begin
            a_val[i] = sum_ref  ^ WA'($urandom_range(1, (1 << WA) - 1));
            m_val[i] = prod_ref ^ WM'($urandom_range(1, (1 << WM) - 1));
          end
          if (cond == 1) begin
            keep = int'($urandom_range(3, K - 1));
            bad[$urandom_range(0, 2)] = 1'b1;
            for (int i = 3; i < K; i++) if (i != keep) bad[i] = 1'b1;
            if ($countones(bad) == K - 3) n_max[g]++;
          end
          ->apply_faults;
          #2.0;
          check(rca_mo == sum_ref,
                $sformatf("K=%0d adder a=%0d b=%0d cin=%0d faulty=%b mo=%0d", K, a, b, cin, bad, rca_mo));
          check(bam_mo == prod_ref,
                $sformatf("K=%0d mult a=%0d b=%0d faulty=%b mo=%0d", K, a, b, bad, bam_mo));
        end
      end
      done[g] = 1'b1;
    end
  end

  initial begin
    wait (done[0] && done[1]);
    for (int g = 0; g < NCFG; g++) begin
      $display("K=%0d: %0d vectors run with %0d faulty units", 6 + g, n_max[g], 3 + g);
      check(n_max[g] > 0, "maximum tolerable fault count never applied");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
