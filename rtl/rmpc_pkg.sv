// rmpc_pkg -- shared types, constants and code tables of the unrolled
// fast simplified successive-cancellation list (FSSCL) decoder for row-merged
// polar codes.
//
// A row-merged polar code repeats selected information bits u_r into frozen
// positions u_d (pairs (r,d)), which turns those frozen bits into "dynamic
// frozen" bits. The decoder is a fully unrolled pipeline whose structure is
// fixed at elaboration time by the code: the frozen set decides which nodes of
// the polar factor tree are pruned into Rate-0, repetition (REP), single parity
// check (SPC) or Rate-1 leaf kernels, and the row-merge pairs decide where
// information bit extraction (IBE) and dynamic frozen bit recovery (DR) logic
// is placed. This package holds the code tables and the constant functions
// that evaluate that structure.
//
// From the paper: 6-bit channel/internal LLRs, 8-bit path metrics, min-sum
// f-function, the three code definitions (the notional C(16,7) example of the
// architecture figure, C(128,60) from density evolution at 2.9 dB with its
// minimal information set {29,43,71}, C(256,75) at 0.1 dB with {63,115,157,167})
// and their row-merge sets. Own choices: symmetric LLR saturation to +/-31, the
// number of bits flipped when generating Rate-1/SPC candidates, and the fixed
// register placement (F and G stages, leaf kernels and sorters registered; H
// stages and Rate-0 leaves combinational).
//
// Lint note: CODE_C256_75 is the catch-all of the table functions and is named
// for users of the package; the table index k is only a few bits wide.
package rmpc_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int Q       = 6;             // LLR width (channel and internal)
  localparam int PMW     = 8;             // path metric width
  localparam int LLR_MAX = (1 << (Q - 1)) - 1;  // symmetric saturation, +/-31
  localparam int PM_MAX  = (1 << PMW) - 1;

  typedef logic signed [Q-1:0] llr_t;
  typedef logic [PMW-1:0]      pm_t;

  // Candidate generation of the Rate-1 and SPC kernels: number of least
  // reliable positions whose flips are enumerated.
  localparam int R1_FLIPS  = 2;   // Rate-1: 2^2 = 4 candidates per path
  localparam int SPC_FLIPS = 3;   // SPC: 2^(3-1) = 4 parity-valid candidates per path

  // Pipeline register placement (cycles per stage).
  localparam int LAT_F    = 1;
  localparam int LAT_G    = 1;
  localparam int LAT_H    = 0;
  localparam int LAT_LEAF = 1;    // leaf kernel output register
  localparam int LAT_SORT = 1;    // sorter output register
  localparam int LAT_R0   = 0;    // Rate-0 leaves are combinational
  localparam int LAT_OUT  = 1;    // final path selection register

  // Node kinds of the pruned polar factor tree.
  typedef enum int {
    NODE_INT  = 0,   // not pruned: F -> left -> G -> right -> H
    NODE_R0   = 1,
    NODE_REP  = 2,
    NODE_SPC  = 3,
    NODE_R1   = 4
  } node_kind_e;

  // ------------------------------------------------------------ code tables
  localparam int CODE_C16_7   = 0;   // architecture-figure example
  localparam int CODE_C128_60 = 1;   // main design
  localparam int CODE_C256_75 = 2;

  localparam int RM16_NR = 2;
  localparam int RM16_R [RM16_NR] = '{5, 6};
  localparam int RM16_D [RM16_NR] = '{10, 12};

  localparam int RM128_NR = 17;
  localparam int RM128_R [RM128_NR] = '{29, 30, 43, 45, 46, 51, 53, 54, 57, 58, 60, 75, 78, 83, 85, 86, 92};
  localparam int RM128_D [RM128_NR] = '{34, 35, 70, 50, 73, 68, 74, 69, 66, 67, 65, 100, 81, 104, 98, 112, 97};

  localparam int RM256_NR = 24;
  localparam int RM256_R [RM256_NR] = '{115, 117, 118, 121, 122, 124, 157, 158, 167, 171, 173, 174,
                                         179, 181, 182, 185, 186, 188, 199, 206, 211, 213, 217, 218};
  localparam int RM256_D [RM256_NR] = '{133, 134, 129, 131, 135, 130, 162, 163, 201, 198, 178, 208,
                                         197, 194, 202, 204, 195, 193, 232, 209, 240, 226, 228, 225};

  function automatic int code_n(input int code);
    case (code)
      CODE_C16_7:   return 16;
      CODE_C128_60: return 128;
      default:      return 256;
    endcase
  endfunction

  function automatic int log2i(input int x);
    int r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  function automatic int code_nr(input int code);
    case (code)
      CODE_C16_7:   return RM16_NR;
      CODE_C128_60: return RM128_NR;
      default:      return RM256_NR;
    endcase
  endfunction

  function automatic int rm_r(input int code, input int k);
    case (code)
      CODE_C16_7:   return RM16_R[k];
      CODE_C128_60: return RM128_R[k];
      default:      return RM256_R[k];
    endcase
  endfunction

  function automatic int rm_d(input int code, input int k);
    case (code)
      CODE_C16_7:   return RM16_D[k];
      CODE_C128_60: return RM128_D[k];
      default:      return RM256_D[k];
    endcase
  endfunction

  // Partial order of synthetic channels: i <= j iff j has, above every bit
  // position t, at least as many ones as i.
  function automatic bit po_leq(input int i, input int j, input int n);
    for (int t = 0; t < n; t++)
      if ($countones(j >> t) < $countones(i >> t)) return 1'b0;
    return 1'b1;
  endfunction

  // Information set membership. C(16,7) is given by its information set,
  // the other two codes by their minimal information sets.
  function automatic bit is_info(input int code, input int i);
    case (code)
      CODE_C16_7:
        return (i == 5) || (i == 6) || (i == 7) || (i == 11) || (i == 13) || (i == 14) || (i == 15);
      CODE_C128_60:
        return po_leq(29, i, 7) || po_leq(43, i, 7) || po_leq(71, i, 7);
      default:
        return po_leq(63, i, 8) || po_leq(115, i, 8) || po_leq(157, i, 8) || po_leq(167, i, 8);
    endcase
  endfunction

  // Index of the row-merge pair whose dynamic frozen bit is d, or -1.
  function automatic int pair_of_d(input int code, input int d);
    for (int k = 0; k < code_nr(code); k++)
      if (rm_d(code, k) == d) return k;
    return -1;
  endfunction

  function automatic int node_kind(input int code, input int base, input int nv);
    int ni = 0;
    for (int i = 0; i < nv; i++) ni += int'(is_info(code, base + i));
    if (ni == 0)  return NODE_R0;
    if (ni == nv) return NODE_R1;
    if (ni == 1 && is_info(code, base + nv - 1)) return NODE_REP;
    if (ni == nv - 1 && !is_info(code, base)) return NODE_SPC;
    return NODE_INT;
  endfunction

  // Candidates produced per input path by a leaf kernel of the given kind.
  function automatic int r1_flips(input int nv);
    return (nv < R1_FLIPS) ? nv : R1_FLIPS;
  endfunction

  function automatic int spc_flips(input int nv);
    return (nv < SPC_FLIPS) ? nv : SPC_FLIPS;
  endfunction

  function automatic int leaf_cands(input int kind, input int nv);
    case (kind)
      NODE_REP: return 2;
      NODE_R1:  return 1 << r1_flips(nv);
      NODE_SPC: return 1 << (spc_flips(nv) - 1);
      default:  return 1;
    endcase
  endfunction

  function automatic int leaf_lat(input int kind);
    return (kind == NODE_R0) ? LAT_R0 : LAT_LEAF + LAT_SORT;
  endfunction

  // Latency of the subtree rooted at the node covering bits [base, base+nv).
  // Evaluated bottom-up without recursion.
  function automatic int node_lat(input int code, input int base, input int nv);
    int lat [1024];
    int kind;
    for (int sz = 1; sz <= nv; sz = sz * 2) begin
      for (int j = 0; j < nv / sz; j++) begin
        kind = node_kind(code, base + j * sz, sz);
        if (kind != NODE_INT) lat[j] = leaf_lat(kind);
        else                  lat[j] = LAT_F + lat[2*j] + LAT_G + lat[2*j+1] + LAT_H;
      end
    end
    return lat[0];
  endfunction

  // Decoder latency from channel LLRs in to decision out.
  function automatic int decoder_lat(input int code);
    return node_lat(code, 0, code_n(code)) + LAT_OUT;
  endfunction

  // ------------------------------------------------------- LLR arithmetic
  function automatic llr_t sat_llr(input int x);
    if (x > LLR_MAX)  return llr_t'(LLR_MAX);
    if (x < -LLR_MAX) return llr_t'(-LLR_MAX);
    return llr_t'(x);
  endfunction

  function automatic int llr_mag(input llr_t a);
    return (a < 0) ? -int'(a) : int'(a);
  endfunction

  function automatic pm_t sat_pm(input int x);
    return (x > PM_MAX) ? pm_t'(PM_MAX) : pm_t'(x);
  endfunction

  // Min-sum f-function.
  function automatic llr_t f_minsum(input llr_t a, input llr_t b);
    int m;
    m = (llr_mag(a) < llr_mag(b)) ? llr_mag(a) : llr_mag(b);
    return sat_llr(((a < 0) != (b < 0)) ? -m : m);
  endfunction

  // g-function: b + (-1)^beta * a.
  function automatic llr_t g_func(input llr_t a, input llr_t b, input logic beta);
    return sat_llr(beta ? int'(b) - int'(a) : int'(b) + int'(a));
  endfunction

endpackage
