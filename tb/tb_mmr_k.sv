// tb_mmr_k: self-check of complete K-MMR circuits with injected unit faults.
//
// Two circuits are tested: the default one (5-MMR of ripple carry adders)
// and a 6-MMR of array multipliers. Every operand vector is applied once
// fault-free and once with a random tolerable fault pattern: at most one
// wrong unit in the majority cluster and up to K-3 wrong units in the
// minority cluster, at least one minority unit left correct. A wrong unit
// is modelled by forcing its output net to the correct word XOR a random
// non-zero mask. MO must equal the sum (or product) computed in the
// testbench. A fault pattern beyond the tolerance (two identical wrong
// majority units) is also applied, and MO must then follow the wrong value,
// which shows the faults do reach the voter.
module tb_mmr_k;
  timeunit 1ns; timeprecision 1ps;
  import mmr_pkg::*;

  localparam int KA = K_DEFAULT;  // adder circuit, default size
  localparam int KM = 6;          // multiplier circuit
  localparam int WA = RCA_OUT_W;
  localparam int WM = BAM_OUT_W;

  int checks = 0, failures = 0;
  int faults_injected = 0;

  fu_in_t        in;
  logic [WA-1:0] a_mo, a_maj, a_min;
  logic [WM-1:0] m_mo, m_maj, m_min;

  mmr_k dut_a (.in(in), .mo(a_mo), .maj(a_maj), .min_o(a_min));
  mmr_k #(.K(KM), .FU(FU_BAM4X4)) dut_m (.in(in), .mo(m_mo), .maj(m_maj), .min_o(m_min));

  // Fault injection: unit i of a circuit is forced to a_val[i] while
  // a_bad[i] is set.
  logic [KA-1:0]          a_bad;
  logic [KA-1:0][WA-1:0]  a_val;
  logic [KM-1:0]          m_bad;
  logic [KM-1:0][WM-1:0]  m_val;
  event                   apply_faults;

  for (genvar i = 0; i < KA; i++) begin : g_inj_a
    always @(apply_faults) begin
      if (a_bad[i]) force dut_a.g_fu[i].y = a_val[i];
      else          release dut_a.g_fu[i].y;
    end
  end
  for (genvar i = 0; i < KM; i++) begin : g_inj_m
    always @(apply_faults) begin
      if (m_bad[i]) force dut_m.g_fu[i].y = m_val[i];
      else          release dut_m.g_fu[i].y;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Random tolerable pattern for a K-unit circuit.
  function automatic logic [15:0] pick_faults(int k);
    logic [15:0] bad = '0;
    int keep;
    int r = int'($urandom_range(0, 3));
    if (r < 3) bad[r] = 1'b1;
    keep = int'($urandom_range(3, k - 1));  // this minority unit stays correct
    for (int i = 3; i < k; i++)
      if (i != keep && $urandom_range(0, 1) == 1) bad[i] = 1'b1;
    return bad;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_bad = '0; m_bad = '0; a_val = '0; m_val = '0;
    ->apply_faults;
    for (int v = 0; v < 512; v++) begin
      logic [WA-1:0] sum_ref;
      logic [WM-1:0] prod_ref;
      logic [15:0]   fa, fm;
      in = '{a: v[3:0], b: v[7:4], cin: v[8]};
      sum_ref  = WA'(int'(in.a) + int'(in.b) + int'(in.cin));
      prod_ref = WM'(int'(in.a) * int'(in.b));
      // fault-free
      a_bad = '0; m_bad = '0; ->apply_faults;
      #2.5;
      check(a_mo == sum_ref,  $sformatf("clean add v=%0d mo=%h", v, a_mo));
      check(m_mo == prod_ref, $sformatf("clean mul v=%0d mo=%h", v, m_mo));
      // tolerable faults
      fa = pick_faults(KA);
      fm = pick_faults(KM);
      for (int i = 0; i < KA; i++) a_val[i] = sum_ref ^ WA'($urandom_range(1, (1 << WA) - 1));
      for (int i = 0; i < KM; i++) m_val[i] = prod_ref ^ WM'($urandom_range(1, (1 << WM) - 1));
      a_bad = fa[KA-1:0]; m_bad = fm[KM-1:0]; ->apply_faults;
      #2.5;
      faults_injected += $countones(a_bad) + $countones(m_bad);
      check(a_mo == sum_ref,  $sformatf("add v=%0d bad=%b mo=%h", v, a_bad, a_mo));
      check(m_mo == prod_ref, $sformatf("mul v=%0d bad=%b mo=%h", v, m_bad, m_mo));
    end
    // Beyond tolerance: F1 = F2 = wrong word, all minority units wrong too.
    in = '{a: 4'd5, b: 4'd3, cin: 1'b0};
    a_val = '0; a_bad = '1; a_val[0] = 5'h1f; a_val[1] = 5'h1f;
    for (int i = 2; i < KA; i++) a_val[i] = 5'h1f;
    a_bad[2] = 1'b0;
    ->apply_faults;
    #2.5;
    check(a_mo == 5'h1f, $sformatf("untolerated pattern not seen at MO: %h", a_mo));
    a_bad = '0; ->apply_faults;
    #2.5;
    check(a_mo == 5'd8, "release after untolerated pattern");
    check(faults_injected > 0, "no faults were injected");
    $display("unit faults injected: %0d", faults_injected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
