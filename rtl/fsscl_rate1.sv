// fsscl_rate1 -- Rate-1 leaf kernel (all bits information).
//
// For each input path the hard decisions of the NV LLRs form the best
// candidate; further candidates flip every subset of the T least reliable
// positions (T = min(NV, R1_FLIPS) = 2 by default, ties broken towards the
// lower index), giving 2^T candidates per path with index l*2^T + c, where
// bit t of c flips the t-th least reliable position. Each candidate's metric
// is the input metric plus the magnitudes of the flipped LLRs (saturating).
// Combinational.
// The paper uses Rate-1 nodes with a reduced candidate set whose threshold
// it tunes for 0.05 dB loss but does not list; the fixed T here is this
// design's choice.
module fsscl_rate1
  import rmpc_pkg::*;
#(
  parameter int L  = 8,
  parameter int NV = 4,
  localparam int T = r1_flips(NV),
  localparam int C = 1 << T
) (
  input  llr_t [L-1:0][NV-1:0]   alpha,
  input  pm_t  [L-1:0]           pm,
  input  logic [L-1:0]           vld,
  output logic [L*C-1:0][NV-1:0] cand_beta,
  output pm_t  [L*C-1:0]         cand_pm,
  output logic [L*C-1:0]         cand_vld
);
  always_comb begin
    int pos [T];
    int best, bestm, acc;
    logic [NV-1:0] used, hd, cb;
    for (int l = 0; l < L; l++) begin
      used = '0;
      for (int i = 0; i < NV; i++) hd[i] = alpha[l][i][Q-1];
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
        for (int t = 0; t < T; t++)
          if (c[t]) begin
            cb[pos[t]] = ~cb[pos[t]];
            acc += llr_mag(alpha[l][pos[t]]);
          end
        cand_beta[l*C + c] = cb;
        cand_pm[l*C + c]   = sat_pm(acc);
        cand_vld[l*C + c]  = vld[l];
      end
    end
  end
endmodule
