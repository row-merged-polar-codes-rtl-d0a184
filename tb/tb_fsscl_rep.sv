// tb_fsscl_rep -- self-checking unit test of fsscl_rep.
//
// Random LLRs and dynamic frozen vectors (frozen positions only) for L=4, NV=8. For each path both codewords of the node (last bit 0 and 1) are encoded in the testbench; candidate 0 must be the one with the smaller discrepancy (ties: last bit 0), candidate 1 the other, each with metric = input metric + discrepancy.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_rep;
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

  localparam int L = 4, NV = 8, C = 2;
  llr_t [L-1:0][NV-1:0] alpha;
  pm_t [L-1:0] pm;
  logic [L-1:0] vld;
  logic [L-1:0][NV-1:0] delta;
  logic [L*C-1:0][NV-1:0] cand_beta;
  pm_t [L*C-1:0] cand_pm;
  logic [L*C-1:0] cand_vld;
  fsscl_rep #(.L(L), .NV(NV)) dut (.*);
  int n_dyn = 0;
  task automatic run();
    for (int t = 0; t < 300; t++) begin
      int a [L][NV];
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < NV; i++) begin a[l][i] = rnd_llr(); alpha[l][i] = llr_t'(a[l][i]); end
        pm[l] = pm_t'($urandom_range(0, 255));
        vld[l] = 1'($urandom);
        delta[l] = ($urandom_range(0, 2) == 0) ? '0 : NV'($urandom) & ~(NV'(1) << (NV-1));
        if (delta[l] != 0) n_dyn++;
      end
      @(posedge clk);
      for (int l = 0; l < L; l++) begin
        logic [255:0] x0, x1;
        logic b0 [] = new[NV], b1 [] = new[NV];
        int aa [] = new[NV];
        int d0, d1, first, e0, e1;
        x0 = enc(256'(delta[l]), NV);
        x1 = enc(256'(delta[l] | (NV'(1) << (NV-1))), NV);
        for (int i = 0; i < NV; i++) begin b0[i] = x0[i]; b1[i] = x1[i]; aa[i] = a[l][i]; end
        d0 = disc(aa, b0); d1 = disc(aa, b1);
        first = (d1 < d0) ? 1 : 0;
        e0 = int'(pm[l]) + (first ? d1 : d0); if (e0 > 255) e0 = 255;
        e1 = int'(pm[l]) + (first ? d0 : d1); if (e1 > 255) e1 = 255;
        check(cand_beta[2*l]   == (first ? x1[NV-1:0] : x0[NV-1:0]), $sformatf("path %0d candidate 0", l));
        check(cand_beta[2*l+1] == (first ? x0[NV-1:0] : x1[NV-1:0]), $sformatf("path %0d candidate 1", l));
        check(int'(cand_pm[2*l]) == e0 && int'(cand_pm[2*l+1]) == e1,
              $sformatf("path %0d metrics %0d/%0d expected %0d/%0d", l, cand_pm[2*l], cand_pm[2*l+1], e0, e1));
        check(cand_vld[2*l] == vld[l] && cand_vld[2*l+1] == vld[l], "valid flags");
      end
    end
    check(n_dyn > 0, "no dynamic frozen bit exercised");
    finish();
  endtask
  initial run();
endmodule
