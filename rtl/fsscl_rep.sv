// fsscl_rep -- repetition (REP) leaf kernel with dynamic frozen bits.
//
// All bits but the last are (static or dynamic) frozen. The dynamic frozen
// vector is encoded to chi = delta * G_NV; the decision LLR of the single
// information bit is sum_j (-1)^chi_j * alpha_j, so chi decides whether each
// LLR is added or subtracted. Candidate 0 of path l is
//   beta_i = HD(decision LLR) XOR chi_i,
// candidate 1 flips every bit of it. Both get the path metric of input path l
// plus sum |alpha_i| over bits where the candidate disagrees with HD(alpha_i).
// Candidate index is 2*l + c. Combinational.
// Follows the paper's REP rule for dynamic frozen bits.
module fsscl_rep
  import rmpc_pkg::*;
#(
  parameter int L  = 8,
  parameter int NV = 4,
  localparam int C = 2
) (
  input  llr_t [L-1:0][NV-1:0]   alpha,
  input  pm_t  [L-1:0]           pm,
  input  logic [L-1:0]           vld,
  input  logic [L-1:0][NV-1:0]   delta,
  output logic [L*C-1:0][NV-1:0] cand_beta,
  output pm_t  [L*C-1:0]         cand_pm,
  output logic [L*C-1:0]         cand_vld
);
  logic [L-1:0][NV-1:0] chi;

  for (genvar l = 0; l < L; l++) begin : g_path
    polar_transform #(.NV(NV)) u_enc (.u(delta[l]), .x(chi[l]));
  end

  always_comb begin
    int sum, acc;
    logic b;
    logic [NV-1:0] cb;
    for (int l = 0; l < L; l++) begin
      sum = 0;
      for (int j = 0; j < NV; j++)
        sum += chi[l][j] ? -int'(alpha[l][j]) : int'(alpha[l][j]);
      b = (sum < 0);
      for (int c = 0; c < C; c++) begin
        for (int i = 0; i < NV; i++) cb[i] = b ^ chi[l][i] ^ (c == 1);
        acc = int'(pm[l]);
        for (int i = 0; i < NV; i++)
          if (cb[i] != alpha[l][i][Q-1]) acc += llr_mag(alpha[l][i]);
        cand_beta[l*C + c] = cb;
        cand_pm[l*C + c]   = sat_pm(acc);
        cand_vld[l*C + c]  = vld[l];
      end
    end
  end
endmodule
