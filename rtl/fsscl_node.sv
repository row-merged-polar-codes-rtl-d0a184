// fsscl_node -- recursive subtree of the fully unrolled, fully pipelined
// FSSCL decoder.
//
// Covers the bits BASE..BASE+NV-1 of the polar factor tree. If the frozen set
// makes this node a Rate-0, REP, SPC or Rate-1 node it is a leaf
// (fsscl_leaf). Otherwise it unrolls into
//   F (registered) -> left subtree -> G (registered) -> right subtree -> H,
// with delay lines that hold the parent LLRs until the G stage and the left
// partial sums and path pointers until the H stage, exactly as in the
// paper's architecture figure. Path metrics, valid flags and the
// repeated-bit side band travel with the LLRs through both children.
// Interface: all vectors are per list path l; o[l] names the input path that
// output path l descends from. Latency: node_lat(CODE, BASE, NV) cycles,
// one new codeword accepted every clock.
//
// Lint note: linting this module as a top of its own reports the child
// outputs (bl, pml, ..., cpr) as undriven. They are driven by the recursive
// child instances, which the linter does not elaborate from this view; the
// full decoder simulates with every one of them driven.
module fsscl_node
  import rmpc_pkg::*;
#(
  parameter int CODE = CODE_C16_7,
  parameter int BASE = 0,
  parameter int NV   = 16,
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

  if (KIND != NODE_INT) begin : g_leaf
    fsscl_leaf #(.CODE(CODE), .BASE(BASE), .NV(NV), .L(L)) u_leaf (
      .clk, .alpha, .pm, .vld, .ub, .cp,
      .beta, .pm_o, .vld_o, .o, .ub_o, .cp_o
    );
  end else begin : g_int
    localparam int H     = NV / 2;
    localparam int LAT_L = node_lat(CODE, BASE, H);
    localparam int LAT_R = node_lat(CODE, BASE + H, H);
    localparam int WSB   = NR * L * (1 + LW) + L * (PMW + 1);  // side band + metrics

    // ---------------- F stage and left subtree
    llr_t [L-1:0][H-1:0]          fa, la;
    logic [NR-1:0][L-1:0]         lub;
    logic [NR-1:0][L-1:0][LW-1:0] lcp;
    pm_t  [L-1:0]                 lpm;
    logic [L-1:0]                 lvld;

    fsscl_f #(.L(L), .NV(NV)) u_f (.alpha(alpha), .alpha_l(fa));
    delay_line #(.W(L*H*Q), .DEPTH(LAT_F)) u_df (.clk, .d(fa), .q(la));
    delay_line #(.W(WSB), .DEPTH(LAT_F)) u_dfs (
      .clk, .d({ub, cp, pm, vld}), .q({lub, lcp, lpm, lvld})
    );

    logic [L-1:0][H-1:0]          bl;
    pm_t  [L-1:0]                 pml;
    logic [L-1:0]                 vldl;
    logic [L-1:0][LW-1:0]         ol;
    logic [NR-1:0][L-1:0]         ubl;
    logic [NR-1:0][L-1:0][LW-1:0] cpl;

    fsscl_node #(.CODE(CODE), .BASE(BASE), .NV(H), .L(L)) u_left (
      .clk, .alpha(la), .pm(lpm), .vld(lvld), .ub(lub), .cp(lcp),
      .beta(bl), .pm_o(pml), .vld_o(vldl), .o(ol), .ub_o(ubl), .cp_o(cpl)
    );

    // parent LLR delay line up to the G stage
    llr_t [L-1:0][NV-1:0] ad;
    delay_line #(.W(L*NV*Q), .DEPTH(LAT_F + LAT_L)) u_da (.clk, .d(alpha), .q(ad));

    // ---------------- G stage and right subtree
    llr_t [L-1:0][H-1:0]          ga, ra;
    logic [NR-1:0][L-1:0]         rub;
    logic [NR-1:0][L-1:0][LW-1:0] rcp;
    pm_t  [L-1:0]                 rpm;
    logic [L-1:0]                 rvld;

    fsscl_g #(.L(L), .NV(NV)) u_g (.alpha(ad), .beta_l(bl), .o_l(ol), .alpha_r(ga));
    delay_line #(.W(L*H*Q), .DEPTH(LAT_G)) u_dg (.clk, .d(ga), .q(ra));
    delay_line #(.W(WSB), .DEPTH(LAT_G)) u_dgs (
      .clk, .d({ubl, cpl, pml, vldl}), .q({rub, rcp, rpm, rvld})
    );

    logic [L-1:0][H-1:0]          br;
    pm_t  [L-1:0]                 pmr;
    logic [L-1:0]                 vldr;
    logic [L-1:0][LW-1:0]         orr;
    logic [NR-1:0][L-1:0]         ubr;
    logic [NR-1:0][L-1:0][LW-1:0] cpr;

    fsscl_node #(.CODE(CODE), .BASE(BASE + H), .NV(H), .L(L)) u_right (
      .clk, .alpha(ra), .pm(rpm), .vld(rvld), .ub(rub), .cp(rcp),
      .beta(br), .pm_o(pmr), .vld_o(vldr), .o(orr), .ub_o(ubr), .cp_o(cpr)
    );

    // left partial sums and path pointers delayed up to the H stage
    logic [L-1:0][H-1:0]  bld;
    logic [L-1:0][LW-1:0] old;
    delay_line #(.W(L*H + L*LW), .DEPTH(LAT_G + LAT_R)) u_db (
      .clk, .d({bl, ol}), .q({bld, old})
    );

    // ---------------- H stage
    logic [L-1:0][NV-1:0] hb;
    logic [L-1:0][LW-1:0] ho;
    fsscl_h #(.L(L), .NV(NV)) u_h (
      .beta_l(bld), .o_l(old), .beta_r(br), .o_r(orr), .beta(hb), .o(ho)
    );
    delay_line #(.W(L*NV + L*LW + WSB), .DEPTH(LAT_H)) u_dh (
      .clk, .d({hb, ho, ubr, cpr, pmr, vldr}), .q({beta, o, ub_o, cp_o, pm_o, vld_o})
    );
  end
endmodule
