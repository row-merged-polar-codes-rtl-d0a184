// tb_fsscl_spc -- self-checking unit test of fsscl_spc.
//
// Random LLRs and dynamic frozen bit delta_0 for L=4, NV=8. Every candidate must satisfy parity(beta) = delta_0 and carry metric = input metric + discrepancy; candidate 0 must reach the minimum discrepancy over all 128 parity-valid words (found by enumeration); candidates of a path must differ.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_spc;
  import rmpc_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int rnd_llr();
    int v = int'($urandom_range(0, 63)) - 32;   // -32 .. 31
    if ($urandom_range(0, 3) == 0) v = int'($urandom_range(0, 8)) - 4;  // small values, ties
    return v;
  endfunction

  function automatic int mag(int v);
    return v < 0 ? -v : v;
  endfunction

  // discrepancy: sum of |a_i| where bit b_i differs from the hard decision
  function automatic int disc(int a [], logic b []);
    int s = 0;
    foreach (a[i]) if (b[i] != (a[i] < 0)) s += mag(a[i]);
    return s;
  endfunction

  // x = u * G_n with G[i][j] = 1 iff j is a bit subset of i
  function automatic logic [255:0] enc(logic [255:0] u, int n);
    logic [255:0] x = '0;
    for (int j = 0; j < n; j++)
      for (int i = 0; i < n; i++)
        if ((i & j) == j) x[j] ^= u[i];
    return x;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  localparam int L = 4, NV = 8, C = 4;
  llr_t [L-1:0][NV-1:0] alpha;
  pm_t [L-1:0] pm;
  logic [L-1:0] vld;
  logic [L-1:0][NV-1:0] delta;
  logic [L*C-1:0][NV-1:0] cand_beta;
  pm_t [L*C-1:0] cand_pm;
  logic [L*C-1:0] cand_vld;
  fsscl_spc #(.L(L), .NV(NV)) dut (.*);
  int n_odd = 0;
  task automatic run();
    for (int t = 0; t < 300; t++) begin
      int a [L][NV];
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < NV; i++) begin a[l][i] = rnd_llr(); alpha[l][i] = llr_t'(a[l][i]); end
        pm[l] = pm_t'($urandom_range(0, 150));
        vld[l] = 1'($urandom);
        delta[l] = NV'($urandom_range(0, 1));
        n_odd += delta[l][0];
      end
      @(posedge clk);
      for (int l = 0; l < L; l++) begin
        int aa [] = new[NV];
        logic b [] = new[NV];
        int best = 1 << 20;
        for (int i = 0; i < NV; i++) aa[i] = a[l][i];
        for (int w = 0; w < (1 << NV); w++)
          if ((^NV'(w)) == delta[l][0]) begin
            int d;
            for (int i = 0; i < NV; i++) b[i] = w[i];
            d = disc(aa, b);
            if (d < best) best = d;
          end
        for (int c = 0; c < C; c++) begin
          int d, e;
          for (int i = 0; i < NV; i++) b[i] = cand_beta[l*C+c][i];
          d = disc(aa, b);
          e = int'(pm[l]) + d; if (e > 255) e = 255;
          check((^cand_beta[l*C+c]) == delta[l][0], $sformatf("path %0d cand %0d parity", l, c));
          check(int'(cand_pm[l*C+c]) == e, $sformatf("path %0d cand %0d metric %0d expected %0d", l, c, cand_pm[l*C+c], e));
          check(cand_vld[l*C+c] == vld[l], "valid flag");
          if (c == 0) check(d == best, $sformatf("path %0d best candidate discrepancy %0d, optimum %0d", l, d, best));
          for (int c2 = 0; c2 < c; c2++)
            check(cand_beta[l*C+c] != cand_beta[l*C+c2], $sformatf("path %0d duplicate candidates", l));
        end
      end
    end
    check(n_odd > 0, "odd parity target never exercised");
    finish();
  endtask
  initial run();
endmodule
