// fsscl_spc -- single parity check (SPC) leaf kernel with a dynamic frozen bit.
//
// All bits but the first are information bits. The first bit u_0 equals the
// XOR of all partial sums, so the frozen bit sets the parity the candidate
// codewords must have: even for a static frozen bit, odd when the dynamic
// frozen bit delta_0 (from the DR kernel) is 1. Per path:
//   gamma = XOR_i HD(alpha_i) XOR delta_0
// and, with p_0..p_{T-1} the T least reliable positions (T = min(NV,
// SPC_FLIPS) = 3 by default), candidate c flips p_{t+1} for every set bit t
// of c and additionally p_0 whenever the parity is still violated. That gives
// 2^(T-1) parity-satisfying candidates with index l*2^(T-1) + c; the metric
// grows by the magnitudes of all flipped LLRs (saturating). Combinational.
// The parity rule with the dynamic frozen bit follows the paper; the parallel
// candidate generation of the paper's reference SPC architecture is not given
// in the paper, so the fixed flip set here is this design's choice.
module fsscl_spc
  import rmpc_pkg::*;
#(
  parameter int L  = 8,
  parameter int NV = 4,
  localparam int T = spc_flips(NV),
  localparam int C = 1 << (T - 1)
) (
  input  llr_t [L-1:0][NV-1:0]   alpha,
  input  pm_t  [L-1:0]           pm,
  input  logic [L-1:0]           vld,
  input  logic [L-1:0][NV-1:0]   delta,
  output logic [L*C-1:0][NV-1:0] cand_beta,
  output pm_t  [L*C-1:0]         cand_pm,
  output logic [L*C-1:0]         cand_vld
);
  always_comb begin
    int pos [T];
    int best, bestm, acc;
    logic [NV-1:0] used, hd, cb;
    logic gamma, par;
    for (int l = 0; l < L; l++) begin
      used = '0;
      for (int i = 0; i < NV; i++) hd[i] = alpha[l][i][Q-1];
      gamma = (^hd) ^ delta[l][0];
      for (int t = 0; t < T; t++) begin
        best = 0;
        bestm = LLR_MAX + 2;
        for (int i = 0; i < NV; i++)
          if (!used[i] && llr_mag(alpha[l][i]) < bestm) begin
            best = i;
            bestm = llr_mag(alpha[l][i]);
          end
        used[best] = 1'b1;
        pos[t] = best;
      end
      for (int c = 0; c < C; c++) begin
        cb = hd;
        acc = int'(pm[l]);
        par = gamma;
        for (int t = 1; t < T; t++)
          if (c[t-1]) begin
            cb[pos[t]] = ~cb[pos[t]];
            acc += llr_mag(alpha[l][pos[t]]);
            par = ~par;
          end
        if (par) begin
          cb[pos[0]] = ~cb[pos[0]];
          acc += llr_mag(alpha[l][pos[0]]);
        end
        cand_beta[l*C + c] = cb;
        cand_pm[l*C + c]   = sat_pm(acc);
        cand_vld[l*C + c]  = vld[l];
      end
    end
  end
endmodule
