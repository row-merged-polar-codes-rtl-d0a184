// fsscl_dr -- dynamic frozen bit recovery (DR).
//
// Builds the dynamic frozen vector delta of a leaf (bits BASE..BASE+NV-1) for
// each of the L paths. For a bit d with row-merge pair (r,d), delta[l][d-BASE]
// is the value of u_r on the path that path l descends from at the time u_r
// was decided: ubit[k][cp[k][l]], where ubit holds u_r for the L paths of
// that time and cp[k][l] is the back-tracking pointer from the current path l
// to that origin path. All other bits are 0 (static frozen or information).
// Combinational: one L-to-1 multiplexer per dynamic frozen bit and path.
// The paper back-tracks with a cascade of multiplexers over the stored path
// pointers of every sorter between r and d inside the DR block; here the
// pointer cp is composed one step at each sorter as the list is pruned (same
// multiplexer count, distributed), and the DR block does the final selection.
//
// Lint note: in a leaf without dynamic frozen bits delta is all zero and the
// ubit/cp inputs stay unused; the instance then reduces to nothing.
module fsscl_dr
  import rmpc_pkg::*;
#(
  parameter int CODE = CODE_C16_7,
  parameter int BASE = 8,
  parameter int NV   = 4,
  parameter int L    = 8,
  localparam int NR  = (code_nr(CODE) > 0) ? code_nr(CODE) : 1,
  localparam int LW  = (L > 1) ? $clog2(L) : 1
) (
  input  logic [NR-1:0][L-1:0]         ubit,
  input  logic [NR-1:0][L-1:0][LW-1:0] cp,
  output logic [L-1:0][NV-1:0]         delta
);
  for (genvar i = 0; i < NV; i++) begin : g_bit
    localparam int K = pair_of_d(CODE, BASE + i);
    for (genvar l = 0; l < L; l++) begin : g_l
      if (K >= 0) begin : g_dyn
        assign delta[l][i] = ubit[K][cp[K][l]];
      end else begin : g_stat
        assign delta[l][i] = 1'b0;
      end
    end
  end
endmodule
