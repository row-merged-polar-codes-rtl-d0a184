// tb_fsscl_ibe -- self-checking unit test of fsscl_ibe.
//
// The leaf of bits 4..7 of the C(16,7) example holds the repeated information bits u_5 and u_6 (row-merges (5,10), (6,12)); random partial sums for L=4 paths; expected u = beta * G_4 from the matrix definition. Also checks a leaf holding no repeated bit.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_fsscl_ibe;
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
  logic [L-1:0][NV-1:0] beta;
  logic [1:0][L-1:0] ubit, ubit2;
  logic [1:0] hit, hit2;
  fsscl_ibe #(.CODE(CODE_C16_7), .BASE(4), .NV(NV), .L(L)) dut (.*);
  fsscl_ibe #(.CODE(CODE_C16_7), .BASE(12), .NV(NV), .L(L)) dut2 (.beta(beta), .ubit(ubit2), .hit(hit2));
  task automatic run();
    for (int t = 0; t < 100; t++) begin
      for (int l = 0; l < L; l++) beta[l] = 4'($urandom);
      @(posedge clk);
      check(hit == 2'b11 && hit2 == 2'b00, "hit mask");
      for (int l = 0; l < L; l++) begin
        logic [255:0] u = enc(256'(beta[l]), NV);
        check(ubit[0][l] == u[1], $sformatf("u_5 of path %0d", l));
        check(ubit[1][l] == u[2], $sformatf("u_6 of path %0d", l));
      end
    end
    finish();
  endtask
  initial run();
endmodule
