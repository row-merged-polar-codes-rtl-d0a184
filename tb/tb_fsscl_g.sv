// tb_fsscl_g -- self-checking unit test of fsscl_g.
//
// Random parent LLRs, left partial sums and path pointers for L=4, NV=8; checks the re-indexed g rule with saturation to +/-31.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_g;
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

  localparam int L = 4, NV = 8;
  llr_t [L-1:0][NV-1:0] alpha;
  logic [L-1:0][NV/2-1:0] beta_l;
  logic [L-1:0][1:0] o_l;
  llr_t [L-1:0][NV/2-1:0] alpha_r;
  fsscl_g #(.L(L), .NV(NV)) dut (.*);
  task automatic run();
    for (int t = 0; t < 300; t++) begin
      int a [L][NV];
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < NV; i++) begin a[l][i] = rnd_llr(); if (a[l][i] == -32) a[l][i] = -31; alpha[l][i] = llr_t'(a[l][i]); end
        beta_l[l] = 4'($urandom);
        o_l[l] = 2'($urandom);
      end
      @(posedge clk);
      for (int l = 0; l < L; l++) for (int i = 0; i < NV/2; i++) begin
        int s = a[o_l[l]][i+NV/2] + (beta_l[l][i] ? -a[o_l[l]][i] : a[o_l[l]][i]);
        if (s > 31) s = 31; else if (s < -31) s = -31;
        check(int'(alpha_r[l][i]) == s, $sformatf("g path %0d bit %0d: %0d expected %0d", l, i, alpha_r[l][i], s));
      end
    end
    finish();
  endtask
  initial run();
endmodule
