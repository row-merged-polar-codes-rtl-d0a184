// fsscl_path_select -- final decision of the list decoder.
//
// After the last leaf, picks the valid path with the smallest path metric
// (lowest index on ties), and outputs its partial sums as the codeword
// estimate x_hat, its bit estimates u_hat = x_hat * G_N, the chosen path index
// and its metric. Registered outputs (one cycle). Selecting the most probable
// path follows the paper; the registered interface and the u_hat output are
// this design's choice.
module fsscl_path_select
  import rmpc_pkg::*;
#(
  parameter int L = 8,
  parameter int N = 16,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic               clk,
  input  logic [L-1:0][N-1:0] beta,
  input  pm_t  [L-1:0]        pm,
  input  logic [L-1:0]        vld,
  output logic [N-1:0]        x_hat,
  output logic [N-1:0]        u_hat,
  output logic [LW-1:0]       best,
  output pm_t                 best_pm
);
  logic [LW-1:0] b;
  logic [N-1:0]  u;

  always_comb begin
    b = '0;
    for (int l = 1; l < L; l++)
      if ((vld[l] && !vld[b]) || (vld[l] == vld[b] && pm[l] < pm[b])) b = LW'(l);
  end

  polar_transform #(.NV(N)) u_dec (.u(beta[b]), .x(u));

  always_ff @(posedge clk) begin
    x_hat   <= beta[b];
    u_hat   <= u;
    best    <= b;
    best_pm <= pm[b];
  end
endmodule
