// fsscl_rate0 -- Rate-0 leaf kernel with dynamic frozen bits.
//
// All bits of the node are frozen, but some may be dynamic frozen bits that
// repeat an earlier information bit. The dynamic frozen vector delta (from the
// DR kernel) is polar-encoded into chi = delta * G_NV, and chi is the node's
// partial sum. Each path metric grows by the sum of |alpha_i| over positions
// where chi disagrees with the hard decision of alpha_i (8-bit, saturating).
// No path splitting, hence no sorter behind it. Combinational.
// Follows the paper's Rate-0 rule with dynamic frozen bits; static frozen
// bits are the special case delta = 0.
module fsscl_rate0
  import rmpc_pkg::*;
#(
  parameter int L  = 8,
  parameter int NV = 4
) (
  input  llr_t [L-1:0][NV-1:0] alpha,
  input  pm_t  [L-1:0]         pm,
  input  logic [L-1:0]         vld,
  input  logic [L-1:0][NV-1:0] delta,
  output logic [L-1:0][NV-1:0] beta,
  output pm_t  [L-1:0]         pm_o,
  output logic [L-1:0]         vld_o
);
  logic [L-1:0][NV-1:0] chi;

  for (genvar l = 0; l < L; l++) begin : g_path
    polar_transform #(.NV(NV)) u_enc (.u(delta[l]), .x(chi[l]));
  end

  always_comb begin
    int acc;
    for (int l = 0; l < L; l++) begin
      acc = int'(pm[l]);
      for (int i = 0; i < NV; i++)
        if (chi[l][i] != alpha[l][i][Q-1]) acc += llr_mag(alpha[l][i]);
      beta[l] = chi[l];
      pm_o[l] = sat_pm(acc);
      vld_o[l] = vld[l];
    end
  end
endmodule
