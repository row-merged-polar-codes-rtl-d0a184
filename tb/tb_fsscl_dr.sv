// tb_fsscl_dr -- self-checking unit test of fsscl_dr.
//
// Leaves of bits 8..11 (dynamic frozen u_10 = u_5) and 12..15 (u_12 = u_6) of the C(16,7) example; random stored bits and back-tracking pointers for L=4; expected delta built from the pair table in the testbench.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_dr;
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

  localparam int L = 4, NV = 4;
  logic [1:0][L-1:0] ubit;
  logic [1:0][L-1:0][1:0] cp;
  logic [L-1:0][NV-1:0] delta, delta2;
  fsscl_dr #(.CODE(CODE_C16_7), .BASE(8), .NV(NV), .L(L)) dut (.*);
  fsscl_dr #(.CODE(CODE_C16_7), .BASE(12), .NV(NV), .L(L)) dut2 (.ubit(ubit), .cp(cp), .delta(delta2));
  task automatic run();
    for (int t = 0; t < 200; t++) begin
      ubit = 8'($urandom);
      cp = 16'($urandom);
      @(posedge clk);
      for (int l = 0; l < L; l++) begin
        check(delta[l] == {1'b0, ubit[0][cp[0][l]], 2'b00}, $sformatf("leaf 8..11 path %0d: %b", l, delta[l]));
        check(delta2[l] == {3'b000, ubit[1][cp[1][l]]}, $sformatf("leaf 12..15 path %0d: %b", l, delta2[l]));
      end
    end
    finish();
  endtask
  initial run();
endmodule
