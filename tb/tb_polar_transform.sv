// tb_polar_transform -- self-checking unit test of polar_transform.
//
// Random 16-bit vectors and all unit vectors; checks against the Kronecker matrix definition and that the transform is an involution.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_polar_transform;
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

  localparam int NV = 16;
  logic [NV-1:0] u, x;
  polar_transform #(.NV(NV)) dut (.*);
  task automatic run();
    for (int t = 0; t < 200; t++) begin
      logic [255:0] e;
      u = (t < NV) ? NV'(1) << t : NV'($urandom);
      @(posedge clk);
      e = enc(256'(u), NV);
      check(x == e[NV-1:0], $sformatf("u=%h x=%h expected %h", u, x, e[NV-1:0]));
      e = enc(256'(x), NV);
      check(e[NV-1:0] == u, "not an involution");
    end
    finish();
  endtask
  initial run();
endmodule
