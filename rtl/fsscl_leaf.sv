// fsscl_leaf -- one pruned leaf of the unrolled decoder: DR, leaf kernel,
// sorter and IBE.
//
// The node kind (Rate-0, REP, SPC, Rate-1) follows from the frozen set of the
// bits BASE..BASE+NV-1. Data flow:
//   DR builds the dynamic frozen vector delta from the repeated-bit side band;
//   Rate-0: combinational kernel, no split, path pointer = identity;
//   others: kernel -> register -> sorter (L of L*C candidates) -> IBE ->
//           register, i.e. a latency of 2 cycles.
// The side band carries, per row-merge pair k, the L stored values ub[k] of
// u_r and the back-tracking pointers cp[k] (current path -> path that held
// u_r). At the sorter every pointer moves one step (cp'[k][l] = cp[k][o[l]]);
// when this leaf holds bit r of pair k, IBE stores the new u_r values and
// resets cp[k] to the identity. The output path pointer o[l] names the input
// path that output path l descends from.
//
// Lint note: a Rate-0 leaf is combinational and leaves clk unused.
module fsscl_leaf
  import rmpc_pkg::*;
#(
  parameter int CODE = CODE_C16_7,
  parameter int BASE = 4,
  parameter int NV   = 4,
  parameter int L    = 4,
  localparam int NR  = (code_nr(CODE) > 0) ? code_nr(CODE) : 1,
  localparam int LW  = (L > 1) ? $clog2(L) : 1
) (
  input  logic                         clk,
  input  llr_t [L-1:0][NV-1:0]         alpha,
  input  pm_t  [L-1:0]                 pm,
  input  logic [L-1:0]                 vld,
  input  logic [NR-1:0][L-1:0]         ub,
  input  logic [NR-1:0][L-1:0][LW-1:0] cp,
  output logic [L-1:0][NV-1:0]         beta,
  output pm_t  [L-1:0]                 pm_o,
  output logic [L-1:0]                 vld_o,
  output logic [L-1:0][LW-1:0]         o,
  output logic [NR-1:0][L-1:0]         ub_o,
  output logic [NR-1:0][L-1:0][LW-1:0] cp_o
);
  localparam int KIND = node_kind(CODE, BASE, NV);
  localparam int C    = leaf_cands(KIND, NV);
  localparam int M    = L * C;
  localparam int MW   = (M > 1) ? $clog2(M) : 1;

  logic [L-1:0][NV-1:0] delta;

  fsscl_dr #(.CODE(CODE), .BASE(BASE), .NV(NV), .L(L)) u_dr (
    .ubit(ub), .cp(cp), .delta(delta)
  );

  if (KIND == NODE_R0) begin : g_r0
    fsscl_rate0 #(.L(L), .NV(NV)) u_k (
      .alpha(alpha), .pm(pm), .vld(vld), .delta(delta),
      .beta(beta), .pm_o(pm_o), .vld_o(vld_o)
    );
    always_comb
      for (int l = 0; l < L; l++) o[l] = LW'(l);
    assign ub_o = ub;
    assign cp_o = cp;
  end else begin : g_split
    logic [M-1:0][NV-1:0] cb, cb_q;
    pm_t  [M-1:0]         cpm, cpm_q;
    logic [M-1:0]         cvld, cvld_q;
    logic [NR-1:0][L-1:0]         ub_q;
    logic [NR-1:0][L-1:0][LW-1:0] cp_q;

    if (KIND == NODE_REP) begin : g_rep
      fsscl_rep #(.L(L), .NV(NV)) u_k (
        .alpha(alpha), .pm(pm), .vld(vld), .delta(delta),
        .cand_beta(cb), .cand_pm(cpm), .cand_vld(cvld)
      );
    end else if (KIND == NODE_SPC) begin : g_spc
      fsscl_spc #(.L(L), .NV(NV)) u_k (
        .alpha(alpha), .pm(pm), .vld(vld), .delta(delta),
        .cand_beta(cb), .cand_pm(cpm), .cand_vld(cvld)
      );
    end else begin : g_r1
      fsscl_rate1 #(.L(L), .NV(NV)) u_k (
        .alpha(alpha), .pm(pm), .vld(vld),
        .cand_beta(cb), .cand_pm(cpm), .cand_vld(cvld)
      );
    end

    // kernel output register
    always_ff @(posedge clk) begin
      cb_q   <= cb;
      cpm_q  <= cpm;
      cvld_q <= cvld;
      ub_q   <= ub;
      cp_q   <= cp;
    end

    logic [L-1:0][MW-1:0] sel;
    pm_t  [L-1:0]         spm;
    logic [L-1:0]         svld;
    logic [L-1:0][NV-1:0] sbeta;
    logic [L-1:0][LW-1:0] org;
    logic [NR-1:0][L-1:0] ibe_u;
    logic [NR-1:0]        ibe_hit;

    fsscl_sorter #(.M(M), .L(L)) u_sort (
      .pm(cpm_q), .vld(cvld_q), .sel(sel), .pm_o(spm), .vld_o(svld)
    );

    always_comb
      for (int l = 0; l < L; l++) begin
        sbeta[l] = cb_q[sel[l]];
        org[l]   = LW'(32'(sel[l]) / C);
      end

    fsscl_ibe #(.CODE(CODE), .BASE(BASE), .NV(NV), .L(L)) u_ibe (
      .beta(sbeta), .ubit(ibe_u), .hit(ibe_hit)
    );

    // sorter output register, with the side-band update
    always_ff @(posedge clk) begin
      beta  <= sbeta;
      pm_o  <= spm;
      vld_o <= svld;
      o     <= org;
      for (int k = 0; k < NR; k++)
        for (int l = 0; l < L; l++) begin
          ub_o[k][l] <= ibe_hit[k] ? ibe_u[k][l] : ub_q[k][l];
          cp_o[k][l] <= ibe_hit[k] ? LW'(l) : cp_q[k][org[l]];
        end
    end
  end
endmodule
