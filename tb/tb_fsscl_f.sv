// tb_fsscl_f -- self-checking unit test of fsscl_f.
//
// Random LLR vectors (including -32 and small values) for L=4 paths and NV=8; checks the min-sum rule with saturation to 31.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_f;
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
  llr_t [L-1:0][NV/2-1:0] alpha_l;
  fsscl_f #(.L(L), .NV(NV)) dut (.*);
  task automatic run();
    for (int t = 0; t < 300; t++) begin
      int a [L][NV];
      for (int l = 0; l < L; l++) for (int i = 0; i < NV; i++) begin
        a[l][i] = rnd_llr(); alpha[l][i] = llr_t'(a[l][i]);
      end
      @(posedge clk);
      for (int l = 0; l < L; l++) for (int i = 0; i < NV/2; i++) begin
        int x = a[l][i], y = a[l][i+NV/2], m, e;
        m = mag(x) < mag(y) ? mag(x) : mag(y);
        if (m > 31) m = 31;
        e = ((x < 0) ^ (y < 0)) ? -m : m;
        check(int'(alpha_l[l][i]) == e, $sformatf("f(%0d,%0d)=%0d expected %0d", x, y, alpha_l[l][i], e));
      end
    end
    finish();
  endtask
  initial run();
endmodule
