// tb_delay_line -- self-checking unit test of delay_line.
//
// Random words through a depth-3 line and a depth-0 line (wire); checks q(t) = d(t-3) and q = d.
// Reference values are computed in the testbench from the definitions, not
// with the module's own code. Ends with a TB_RESULT line; a watchdog stops
// the run after 100000 clock cycles.
module tb_delay_line;
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

  logic [7:0] d, q, q0;
  logic [7:0] hist [$];
  delay_line #(.W(8), .DEPTH(3)) dut (.clk(clk), .d(d), .q(q));
  delay_line #(.W(8), .DEPTH(0)) dut0 (.clk(clk), .d(d), .q(q0));
  task automatic run();
    d = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      if (t >= 3) check(q == hist[t-3], $sformatf("cycle %0d: %h expected %h", t, q, hist[t-3]));
      d = 8'($urandom);
      hist.push_back(d);
      #1 check(q0 == d, "depth 0");
    end
    finish();
  endtask
  initial run();
endmodule
