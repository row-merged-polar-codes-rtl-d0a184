// polar_transform -- x = u * G_NV with G_NV the NV-fold Kronecker power of
// [[1,0],[1,1]].
//
// An XOR butterfly network of log2(NV) layers: in the layer with stride h
// every position i with bit h clear takes x[i] ^= x[i+h]. G_NV is its own
// inverse over GF(2), so the same network maps partial sums back to bit
// estimates. Used by the information bit extraction (IBE) kernel and by the
// Rate-0 and repetition kernels to encode the dynamic frozen vector into its
// partial sums chi (both per the paper). Combinational.
module polar_transform #(
  parameter int NV = 4
) (
  input  logic [NV-1:0] u,
  output logic [NV-1:0] x
);
  always_comb begin
    x = u;
    for (int h = 1; h < NV; h = h * 2)
      for (int i = 0; i < NV; i++)
        if ((i & h) == 0) x[i] = x[i] ^ x[i + h];
  end
endmodule
