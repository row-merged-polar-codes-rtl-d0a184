// tb_fsscl_path_select -- self-checking unit test of fsscl_path_select.
//
// Random partial sums, metrics (with ties) and valid flags for L=8, N=16; expected: lowest-metric valid path, lowest index on ties, u_hat from the matrix definition, one cycle later.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_path_select;
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

  localparam int L = 8, N = 16;
  logic [L-1:0][N-1:0] beta;
  pm_t [L-1:0] pm;
  logic [L-1:0] vld;
  logic [N-1:0] x_hat, u_hat;
  logic [2:0] best;
  pm_t best_pm;
  fsscl_path_select #(.L(L), .N(N)) dut (.*);
  task automatic run();
    for (int t = 0; t < 200; t++) begin
      int b = -1;
      logic [255:0] u;
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        beta[l] = 16'($urandom);
        pm[l] = pm_t'($urandom_range(0, 20));
        vld[l] = ($urandom_range(0, 3) != 0) || l == 3;
      end
      for (int l = 0; l < L; l++) if (vld[l] && (b < 0 || pm[l] < pm[b])) b = l;
      @(negedge clk);
      u = enc(256'(beta[b]), N);
      check(int'(best) == b, $sformatf("best %0d expected %0d", best, b));
      check(x_hat == beta[b] && best_pm == pm[b], "x_hat / metric");
      check(u_hat == u[N-1:0], "u_hat");
    end
    finish();
  endtask
  initial run();
endmodule
