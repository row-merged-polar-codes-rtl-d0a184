// fsscl_sorter -- list pruning: keeps the L best of M candidate paths.
//
// Every candidate carries a path metric (a cost, smaller is better) and a
// valid flag; invalid candidates (children of list slots that are not yet in
// use) rank behind all valid ones. Each candidate's rank is the number of
// candidates that beat it, comparing (invalid, metric, index)
// lexicographically, so ranks are distinct and ties go to the lower index.
// Output slot j receives the candidate of rank j: sel[j] is its index, and
// pm_o/vld_o its metric and flag, so the outputs are sorted ascending.
// Combinational, M*(M-1) comparators in parallel.
// The paper names the sorter stages but not their insides; the rank-based
// parallel selection and the valid flags are this design's choice.
module fsscl_sorter
  import rmpc_pkg::*;
#(
  parameter int M  = 16,   // candidates in
  parameter int L  = 8,    // survivors out
  localparam int MW = (M > 1) ? $clog2(M) : 1
) (
  input  pm_t  [M-1:0]        pm,
  input  logic [M-1:0]        vld,
  output logic [L-1:0][MW-1:0] sel,
  output pm_t  [L-1:0]        pm_o,
  output logic [L-1:0]        vld_o
);
  int rank [M];

  always_comb begin
    for (int i = 0; i < M; i++) begin
      rank[i] = 0;
      for (int j = 0; j < M; j++)
        if (j != i) begin
          if (vld[j] && !vld[i])
            rank[i]++;
          else if (vld[j] == vld[i] && (pm[j] < pm[i] || (pm[j] == pm[i] && j < i)))
            rank[i]++;
        end
    end
    for (int r = 0; r < L; r++) begin
      sel[r] = '0;
      for (int i = 0; i < M; i++)
        if (rank[i] == r) sel[r] = MW'(i);
      pm_o[r]  = pm[sel[r]];
      vld_o[r] = vld[sel[r]];
    end
  end
endmodule
