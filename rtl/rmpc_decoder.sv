// rmpc_decoder -- fully unrolled, fully pipelined fast simplified SCL decoder
// for row-merged polar codes (top level).
//
// Accepts one frame of N channel LLRs per clock (in_valid) and, a fixed
// decoder_lat(CODE) cycles later, returns the decided codeword x_hat, the bit
// vector u_hat = x_hat * G_N (information bits at the information set,
// repeated values at the dynamic frozen positions, zeros elsewhere), the
// index of the chosen list path and its path metric (out_valid).
// Internally the root fsscl_node unrolls the whole pruned polar factor tree.
// The list starts with one valid path (slot 0) with metric 0; the other slots
// are marked invalid until path splits fill them.
// Defaults: the C(128,60) row-merged code with 17 row-merges and list size
// L = 8, 6-bit LLRs, 8-bit path metrics (all from the paper). CODE selects
// the C(16,7) example (0), C(128,60) (1) or C(256,75) (2); L = 4 gives the
// paper's SCL-4 decoders. Only in_valid/out_valid are reset (active-low
// synchronous rst_n); the data path needs no reset.
//
// Lint note: the root's path pointers and repeated-bit side band are not
// needed after the last leaf and are left unconnected on purpose.
module rmpc_decoder
  import rmpc_pkg::*;
#(
  parameter int CODE = CODE_C128_60,
  parameter int L    = 8,
  localparam int N   = code_n(CODE),
  localparam int NR  = (code_nr(CODE) > 0) ? code_nr(CODE) : 1,
  localparam int LW  = (L > 1) ? $clog2(L) : 1,
  localparam int LAT = decoder_lat(CODE)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  llr_t [N-1:0] llr,
  output logic         out_valid,
  output logic [N-1:0] x_hat,
  output logic [N-1:0] u_hat,
  output logic [LW-1:0] best_path,
  output pm_t          best_pm
);
  llr_t [L-1:0][N-1:0]          a0;
  pm_t  [L-1:0]                 pm0;
  logic [L-1:0]                 vld0;
  logic [NR-1:0][L-1:0]         ub0;
  logic [NR-1:0][L-1:0][LW-1:0] cp0;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      a0[l]   = llr;
      pm0[l]  = '0;
      vld0[l] = (l == 0);
    end
    ub0 = '0;
    cp0 = '0;
  end

  logic [L-1:0][N-1:0]          beta;
  pm_t  [L-1:0]                 pm;
  logic [L-1:0]                 vld;
  logic [L-1:0][LW-1:0]         o;
  logic [NR-1:0][L-1:0]         ub;
  logic [NR-1:0][L-1:0][LW-1:0] cp;

  fsscl_node #(.CODE(CODE), .BASE(0), .NV(N), .L(L)) u_root (
    .clk, .alpha(a0), .pm(pm0), .vld(vld0), .ub(ub0), .cp(cp0),
    .beta(beta), .pm_o(pm), .vld_o(vld), .o(o), .ub_o(ub), .cp_o(cp)
  );

  fsscl_path_select #(.L(L), .N(N)) u_sel (
    .clk, .beta(beta), .pm(pm), .vld(vld),
    .x_hat(x_hat), .u_hat(u_hat), .best(best_path), .best_pm(best_pm)
  );

  // frame valid chain
  logic [LAT-1:0] vchain;
  always_ff @(posedge clk) begin
    if (!rst_n) vchain <= '0;
    else        vchain <= {vchain[LAT-2:0], in_valid};
  end
  assign out_valid = vchain[LAT-1];
endmodule
