// tb_fsscl_sorter -- self-checking unit test of fsscl_sorter.
//
// Random metrics (narrow range for many ties) and valid flags for M=16 candidates, L=4 survivors; the reference is a stable selection in the testbench (valid first, then metric, then index).
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_sorter;
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

  localparam int M = 16, L = 4;
  pm_t [M-1:0] pm;
  logic [M-1:0] vld;
  logic [L-1:0][3:0] sel;
  pm_t [L-1:0] pm_o;
  logic [L-1:0] vld_o;
  fsscl_sorter #(.M(M), .L(L)) dut (.*);
  task automatic run();
    for (int t = 0; t < 400; t++) begin
      int key [M];
      bit taken [M];
      for (int i = 0; i < M; i++) begin
        pm[i] = (t % 2) ? pm_t'($urandom_range(0, 6)) : pm_t'($urandom);
        vld[i] = ($urandom_range(0, 3) != 0);
        key[i] = (vld[i] ? 0 : 1 << 20) + int'(pm[i]) * 64 + i;
        taken[i] = 0;
      end
      @(posedge clk);
      for (int r = 0; r < L; r++) begin
        int b = -1;
        for (int i = 0; i < M; i++) if (!taken[i] && (b < 0 || key[i] < key[b])) b = i;
        taken[b] = 1;
        check(int'(sel[r]) == b, $sformatf("slot %0d selects %0d expected %0d", r, sel[r], b));
        check(pm_o[r] == pm[b] && vld_o[r] == vld[b], $sformatf("slot %0d metric/valid", r));
      end
    end
    finish();
  endtask
  initial run();
endmodule
