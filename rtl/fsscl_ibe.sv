// fsscl_ibe -- information bit extraction for repeated information bits.
//
// Inside a pruned leaf the information bits are not decided one by one; the
// leaf only returns partial sums beta. For every row-merge pair (r,d) whose
// information bit r lies in this leaf (bits BASE..BASE+NV-1), the kernel
// recovers u_r = (beta * G_NV)[r - BASE] for each of the L paths and marks
// the pair in `hit`. Only the XOR trees feeding used outputs survive
// synthesis, so the circuit depends on the row-merge set, as in the paper's
// IBE detail. Combinational. Follows the paper.
//
// Lint note: only the transform outputs at positions r are read; the unused
// XOR gates are removed by synthesis, as intended.
module fsscl_ibe
  import rmpc_pkg::*;
#(
  parameter int CODE = CODE_C16_7,
  parameter int BASE = 4,
  parameter int NV   = 4,
  parameter int L    = 8,
  localparam int NR  = (code_nr(CODE) > 0) ? code_nr(CODE) : 1
) (
  input  logic [L-1:0][NV-1:0] beta,
  output logic [NR-1:0][L-1:0] ubit,
  output logic [NR-1:0]        hit
);
  logic [L-1:0][NV-1:0] u;

  for (genvar l = 0; l < L; l++) begin : g_path
    polar_transform #(.NV(NV)) u_dec (.u(beta[l]), .x(u[l]));
  end

  for (genvar k = 0; k < NR; k++) begin : g_pair
    localparam int R = (k < code_nr(CODE)) ? rm_r(CODE, k) : -1;
    if (R >= BASE && R < BASE + NV) begin : g_hit
      assign hit[k] = 1'b1;
      for (genvar l = 0; l < L; l++) begin : g_l
        assign ubit[k][l] = u[l][R - BASE];
      end
    end else begin : g_miss
      assign hit[k]  = 1'b0;
      assign ubit[k] = '0;
    end
  end
endmodule
