// tb_rmpc_c256_l8 -- end-to-end workload test of the row-merged polar decoder for
// C(256,75), 24 row-merges, list size 8.
//
// Same method as the full-size test: random messages are encoded by the
// testbench's own row-merged polar encoder (information set rebuilt from the
// minimal information set via the partial order, u_d = u_r, x = u * G_N),
// sent as LLRs of magnitude 8 with approximately Gaussian integer noise, one
// frame per clock. Checks: codeword validity, correct decoding of noiseless
// and low-noise frames (noiseless ones with metric 0), >= 90 % at higher
// noise, latency from an independent walk of the pruned tree, one output per
// clock, and that repeated bits of 1 reach Rate-0, REP and SPC leaves and
// channel errors get corrected.
module tb_rmpc_c256_l8;
  import rmpc_pkg::*;

  localparam int CODE = CODE_C256_75;
  localparam int L    = 8;
  localparam int NR   = 24;
  localparam int N    = 256;
  localparam int LOGN = 8;
  localparam int NFR  = 240;          // frames
  localparam int A    = 8;            // noiseless LLR magnitude

  logic clk = 0, rst_n = 0, in_valid = 0;
  llr_t [N-1:0] llr = '0;
  logic out_valid;
  logic [N-1:0] x_hat, u_hat;
  logic [2:0] best_path;
  pm_t best_pm;

  rmpc_decoder #(.CODE(CODE), .L(L)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- code
  int rr [NR] = '{115, 117, 118, 121, 122, 124, 157, 158, 167, 171, 173, 174, 179, 181, 182, 185, 186, 188, 199, 206, 211, 213, 217, 218};
  int dd [NR] = '{133, 134, 129, 131, 135, 130, 162, 163, 201, 198, 178, 208, 197, 194, 202, 204, 195, 193, 232, 209, 240, 226, 228, 225};
  bit info [N];

  // j is at least as reliable as i: j is reachable from i by adding ones or
  // moving ones to more significant positions (greedy matching, MSB first).
  function automatic bit dominates(int i, int j);
    int need = 0;
    for (int b = LOGN - 1; b >= 0; b--) begin
      need += int'(i[b]) - int'(j[b]);
      if (need > 0) return 0;
    end
    return 1;
  endfunction

  function automatic logic [N-1:0] gn(logic [N-1:0] u);
    logic [N-1:0] x;
    for (int j = 0; j < N; j++) begin
      x[j] = 0;
      for (int i = 0; i < N; i++)
        if ((i & j) == j) x[j] ^= u[i];    // G_N[i][j] = 1 iff j is a subset of i
    end
    return x;
  endfunction

  function automatic bit is_codeword_u(logic [N-1:0] u);
    for (int i = 0; i < N; i++) begin
      int k = -1;
      for (int m = 0; m < NR; m++) if (dd[m] == i) k = m;
      if (!info[i]) begin
        if (k >= 0) begin if (u[i] != u[rr[k]]) return 0; end
        else if (u[i]) return 0;
      end
    end
    return 1;
  endfunction

  // ----------------------------------------------- independent tree walk
  int kind_cnt_r0_dyn1, rep_dyn1, spc_dyn1;
  function automatic int kind_of(int base, int nv);
    int ni = 0;
    for (int i = base; i < base + nv; i++) ni += info[i];
    if (ni == 0) return 1;                              // Rate-0
    if (ni == nv) return 4;                             // Rate-1
    if (ni == 1 && info[base+nv-1]) return 2;           // REP
    if (ni == nv - 1 && !info[base]) return 3;          // SPC
    return 0;
  endfunction

  function automatic int lat_of(int base, int nv);
    int k = kind_of(base, nv);
    if (k == 1) return 0;
    if (k != 0) return 2;
    return 1 + lat_of(base, nv/2) + 1 + lat_of(base + nv/2, nv/2);
  endfunction

  // mechanism use on the transmitted path: leaves with a dynamic frozen 1
  function automatic void count_dyn(int base, int nv, logic [N-1:0] u,
                                    inout int r0, inout int rep, inout int spc);
    int k = kind_of(base, nv);
    bit any1 = 0;
    if (k == 0) begin
      count_dyn(base, nv/2, u, r0, rep, spc);
      count_dyn(base + nv/2, nv/2, u, r0, rep, spc);
      return;
    end
    for (int i = base; i < base + nv; i++) if (!info[i] && u[i]) any1 = 1;
    if (any1) begin
      if (k == 1) r0++;
      if (k == 2) rep++;
      if (k == 3) spc++;
    end
  endfunction

  // ------------------------------------------------- stimulus and monitor
  // One always block drives a new frame every clock and checks the outputs,
  // so that every value is sampled at the same clock edge. A frame driven at
  // edge E is taken by the decoder at edge E+1; its result is seen here at
  // edge E+1+latency.
  logic [N-1:0] sent_u [$];
  int          sent_c  [$];     // noise class * 1000 + channel errors
  int          sent_t  [$];
  int lat_exp, cyc = 0, nin = 0, nout = 0;
  int n_r0 = 0, n_rep = 0, n_spc = 0, n_corr = 0, ok_hi = 0, n_hi = 0;
  int last_out = -1, gaps = 0;

  function automatic int gauss(int s100);
    int acc = 0;
    for (int t = 0; t < 12; t++) acc += int'($urandom_range(0, 1000)) - 500;
    return (acc * s100) / 100000;  // approx. N(0, (0.91 * s100/100)^2)
  endfunction

  initial begin
    for (int i = 0; i < N; i++)
      info[i] = dominates(63, i) || dominates(115, i) || dominates(157, i) || dominates(167, i);
    lat_exp = lat_of(0, N) + 1;
  end

  always @(posedge clk) begin
    // ---- monitor
    if (out_valid && rst_n) begin   // out_valid is only defined once reset has acted
      logic [N-1:0] u;
      int cls, nerr, t0;
      u    = sent_u.pop_front();
      cls  = sent_c[0] / 1000;
      nerr = sent_c.pop_front() % 1000;
      t0   = sent_t.pop_front();
      check(cyc - t0 == lat_exp + 1, $sformatf("latency %0d, expected %0d", cyc - t0 - 1, lat_exp));
      if (last_out >= 0 && cyc != last_out + 1) gaps++;
      last_out = cyc;
      check(is_codeword_u(u_hat), $sformatf("frame %0d: output is not a codeword", nout));
      check(gn(u_hat) == x_hat, $sformatf("frame %0d: u_hat and x_hat disagree", nout));
      if (cls == 0) begin
        check(u_hat == u, $sformatf("frame %0d (noiseless): wrong message", nout));
        check(best_pm == 0, $sformatf("frame %0d (noiseless): metric %0d", nout, best_pm));
      end else if (cls == 1) begin
        check(u_hat == u, $sformatf("frame %0d (low noise, %0d channel errors): wrong message", nout, nerr));
        if (u_hat == u && nerr > 0) n_corr++;
      end else begin
        n_hi++;
        if (u_hat == u) ok_hi++;
        if (u_hat == u && nerr > 0) n_corr++;
      end
      nout++;
      if (nout == NFR) begin
        check(gaps == 0, "outputs not one per clock");
        check(ok_hi * 10 >= n_hi * 9, $sformatf("higher noise: only %0d of %0d frames correct", ok_hi, n_hi));
        $display("latency %0d cycles; mechanisms: R0 dyn=1 %0d, REP dyn=1 %0d, SPC odd parity %0d, corrected frames %0d, high-noise ok %0d/%0d",
                 lat_exp, n_r0, n_rep, n_spc, n_corr, ok_hi, n_hi);
        check(n_r0 > 0, "no Rate-0 leaf received a dynamic frozen 1");
        check(n_rep > 0, "no REP leaf received a dynamic frozen 1");
        check(n_spc > 0, "no SPC leaf received an odd parity target");
        check(n_corr > 0, "no channel error was corrected");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    // ---- stimulus
    if (cyc == 3) rst_n <= 1'b1;
    if (cyc >= 5 && nin < NFR) begin
      logic [N-1:0] u, x;
      int cls, nerr, y;
      u = '0;
      for (int i = 0; i < N; i++) if (info[i]) u[i] = 1'($urandom_range(0, 1));
      for (int m = 0; m < NR; m++) u[dd[m]] = u[rr[m]];
      x = gn(u);
      cls = (nin < 40) ? 0 : (nin < 160) ? 1 : 2;   // noiseless, low, higher noise
      nerr = 0;
      for (int i = 0; i < N; i++) begin
        y = (x[i] ? -A : A) + ((cls == 0) ? 0 : gauss(cls == 1 ? 280 : 450));
        if (y > 31) y = 31;
        if (y < -31) y = -31;
        llr[i] <= llr_t'(y);
        if ((y < 0) != x[i]) nerr++;
      end
      count_dyn(0, N, u, n_r0, n_rep, n_spc);
      in_valid <= 1'b1;
      sent_u.push_back(u);
      sent_c.push_back(cls * 1000 + nerr);
      sent_t.push_back(cyc);
      nin++;
    end else begin
      in_valid <= 1'b0;
    end
    cyc++;
  end

  initial begin
    repeat (NFR + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
