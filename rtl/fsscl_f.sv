// fsscl_f -- f-function kernel of the unrolled FSSCL decoder.
//
// For every one of the L list paths the kernel maps the NV LLRs a node
// receives from its parent to the NV/2 LLRs of its left child with the
// hardware-friendly min-sum rule
//   alpha_l[i] = sign(a[i]) * sign(a[i+NV/2]) * min(|a[i]|, |a[i+NV/2]|).
// The kernel is combinational; the enclosing node adds the output register.
// The min-sum formulation and the 6-bit LLRs follow the paper; saturation of
// the magnitude to 31 (a -32 input) is this design's choice.
module fsscl_f
  import rmpc_pkg::*;
#(
  parameter int L  = 8,   // list size
  parameter int NV = 4    // node size (LLRs in)
) (
  input  llr_t [L-1:0][NV-1:0]   alpha,
  output llr_t [L-1:0][NV/2-1:0] alpha_l
);
  always_comb begin
    for (int l = 0; l < L; l++)
      for (int i = 0; i < NV / 2; i++)
        alpha_l[l][i] = f_minsum(alpha[l][i], alpha[l][i + NV/2]);
  end
endmodule
