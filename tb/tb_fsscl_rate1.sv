// tb_fsscl_rate1 -- self-checking unit test of fsscl_rate1.
//
// Random LLRs for L=4, NV=8. Candidate 0 must be the hard decision; with m1 <= m2 the two smallest magnitudes (sorted in the testbench) the candidate metrics must be input + {0, m1, m2, m1+m2}; all candidates distinct, metric = input + discrepancy.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_rate1;
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
  logic [L*C-1:0][NV-1:0] cand_beta;
  pm_t [L*C-1:0] cand_pm;
  logic [L*C-1:0] cand_vld;
  fsscl_rate1 #(.L(L), .NV(NV)) dut (.*);
  task automatic run();
    for (int t = 0; t < 300; t++) begin
      int a [L][NV];
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < NV; i++) begin a[l][i] = rnd_llr(); alpha[l][i] = llr_t'(a[l][i]); end
        pm[l] = pm_t'($urandom_range(0, 150));
        vld[l] = 1'($urandom);
      end
      @(posedge clk);
      for (int l = 0; l < L; l++) begin
        int aa [] = new[NV];
        int mags [$];
        int exp_d [4];
        logic b [] = new[NV];
        for (int i = 0; i < NV; i++) begin aa[i] = a[l][i]; mags.push_back(mag(a[l][i])); end
        mags.sort();
        exp_d = '{0, mags[0], mags[1], mags[0] + mags[1]};
        for (int c = 0; c < C; c++) begin
          int d, e;
          for (int i = 0; i < NV; i++) b[i] = cand_beta[l*C+c][i];
          d = disc(aa, b);
          e = int'(pm[l]) + d; if (e > 255) e = 255;
          check(int'(cand_pm[l*C+c]) == e, $sformatf("path %0d cand %0d metric", l, c));
          check(d == exp_d[c], $sformatf("path %0d cand %0d discrepancy %0d expected %0d", l, c, d, exp_d[c]));
          check(cand_vld[l*C+c] == vld[l], "valid flag");
          for (int c2 = 0; c2 < c; c2++)
            check(cand_beta[l*C+c] != cand_beta[l*C+c2], "duplicate candidates");
        end
      end
    end
    finish();
  endtask
  initial run();
endmodule
