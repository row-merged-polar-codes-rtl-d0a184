// fsscl_g -- g-function kernel of the unrolled FSSCL decoder.
//
// Computes the LLRs of a node's right child. Because the left subtree may
// have re-ordered the list, the parent LLRs (taken from the delay line) are
// first re-indexed with the left subtree's composite path pointer o_l: output
// path l continues input path o_l[l]. Then, per bit,
//   alpha_r[l][i] = a[o_l[l]][i+NV/2] + (-1)^beta_l[l][i] * a[o_l[l]][i],
// saturated to +/-31. Combinational; the enclosing node registers it.
// Re-indexing by path pointers follows the architecture figure (path pointer
// delay lines feeding the G stages); saturation is this design's choice.
module fsscl_g
  import rmpc_pkg::*;
#(
  parameter int L  = 8,
  parameter int NV = 4,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  llr_t [L-1:0][NV-1:0]   alpha,    // parent LLRs, input path order
  input  logic [L-1:0][NV/2-1:0] beta_l,   // left child partial sums
  input  logic [L-1:0][LW-1:0]   o_l,      // left subtree path pointers
  output llr_t [L-1:0][NV/2-1:0] alpha_r
);
  always_comb begin
    for (int l = 0; l < L; l++)
      for (int i = 0; i < NV / 2; i++)
        alpha_r[l][i] = g_func(alpha[o_l[l]][i], alpha[o_l[l]][i + NV/2], beta_l[l][i]);
  end
endmodule
