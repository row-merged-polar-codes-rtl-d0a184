// fsscl_h -- h-function (partial-sum combine) kernel of the unrolled FSSCL
// decoder.
//
// Builds a node's partial sums from those of its children:
//   beta[l][i]        = beta_l[o_r[l]][i] XOR beta_r[l][i]   (i < NV/2)
//   beta[l][i + NV/2] = beta_r[l][i]
// The left partial sums come from a delay line and are re-indexed with the
// right subtree's path pointer o_r. The node's own composite path pointer is
// o[l] = o_l[o_r[l]], so that the parent can re-index its data in turn.
// Purely combinational (XORs and multiplexers), as the H stages drawn with
// dotted borders in the paper's architecture figure.
module fsscl_h #(
  parameter int L  = 8,
  parameter int NV = 4,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0][NV/2-1:0] beta_l,
  input  logic [L-1:0][LW-1:0]   o_l,
  input  logic [L-1:0][NV/2-1:0] beta_r,
  input  logic [L-1:0][LW-1:0]   o_r,
  output logic [L-1:0][NV-1:0]   beta,
  output logic [L-1:0][LW-1:0]   o
);
  always_comb begin
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < NV / 2; i++) begin
        beta[l][i]        = beta_l[o_r[l]][i] ^ beta_r[l][i];
        beta[l][i + NV/2] = beta_r[l][i];
      end
      o[l] = o_l[o_r[l]];
    end
  end
endmodule
