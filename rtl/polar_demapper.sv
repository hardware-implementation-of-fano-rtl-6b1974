// polar_demapper: successive-cancellation style LLR demapper that can follow a
// backtracking tree search.
//
// For bit index i (bits i_{n-1}..i_0) the demapped LLR z_i is obtained by
// descending the polar tree from the channel LLRs (level n) to level 0.  Level
// k holds, for the aligned block of 2^k bits containing i, the LLRs computed
// from the parent block at level k+1: the f (min-sum) operation when bit i_k is
// 0, and the g operation, using the partial sums of the left sibling block
// from pd_psum_network, when i_k is 1.  Natural bit order is used throughout.
//
// Every level is an N-entry register array in which each aligned block has its
// own slot, so all intermediate LLRs of the tree (N log2 N values) are kept for
// the whole decoding session.  This is what lets the demapper serve a request
// for any earlier index after the search backtracks.  Level 0 is the z vector
// itself; the decoder reads z_i and z_{i-1} from it through multiplexers.
//
// Timing: a start pulse with index i schedules the levels that must be
// recomputed, which are levels tz(i)..0 (tz = trailing zeros; all n levels for
// i = 0), because only those blocks begin at i and therefore depend on the
// latest decided bit.  One level is computed per cycle with 2^k processing
// elements at level k; done is high in the cycle that writes z_i.  A frame
// decoded without backtracking therefore costs 2N-2 demapper cycles.  While a
// request is running, Ureg must not change.  The register organisation and the
// schedule are this design's reading of an architecture the source only cites.
module polar_demapper #(
  parameter int unsigned N = pac_pkg::N_DEF,
  parameter int unsigned Q = pac_pkg::Q_DEF,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [LOGN-1:0]     idx,
  input  logic signed [Q-1:0] llr [N],
  input  logic [N-1:0]        u,
  output logic                busy,
  output logic                done,
  output logic signed [Q-1:0] z [N]
);
  import pac_pkg::*;

  // Tree level k is stored in g_level[k].lv; the channel LLR vector is the
  // parent of the top level.
  logic [N-1:0]        ps [LOGN];
  logic [LOGN-1:0]     idx_q;
  logic [$clog2(LOGN+1)-1:0] lvl_q;
  logic                act_q;

  pd_psum_network #(.N(N)) u_ps (.u(u), .ps(ps));

  // Highest level to recompute for index i.
  function automatic int unsigned top_level(input logic [LOGN-1:0] i);
    int unsigned t;
    if (i == '0) return LOGN - 1;
    t = 0;
    for (int bb = int'(LOGN) - 1; bb >= 0; bb--) if (i[bb]) t = bb;
    return t;
  endfunction

  always_comb begin
    busy     = act_q;
    done     = act_q && (lvl_q == '0);
    z        = g_level[0].lv;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= 1'b0;
      lvl_q <= '0;
      idx_q <= '0;
    end else if (start) begin
      act_q <= 1'b1;
      idx_q <= idx;
      lvl_q <= ($clog2(LOGN+1))'(top_level(idx));
    end else if (act_q) begin
      if (lvl_q == '0) act_q <= 1'b0;
      else             lvl_q <= lvl_q - 1'b1;
    end
  end

  // One bank of 2^k processing elements per level k.
  for (genvar k = 0; k < int'(LOGN); k++) begin : g_level
    localparam int unsigned W = 1 << k;
    logic signed [Q-1:0] lv [N];
    logic signed [Q-1:0] parent [N];
    logic [LOGN-1:0] pbase, base;
    logic            bit_k;
    logic signed [Q-1:0] res [W];

    if (k == int'(LOGN) - 1) begin : g_top
      assign parent = llr;
    end else begin : g_inner
      assign parent = g_level[k+1].lv;
    end

    always_comb begin
      pbase = (idx_q >> (k + 1)) << (k + 1);
      base  = (idx_q >> k) << k;
      bit_k = idx_q[k];
      for (int j = 0; j < int'(W); j++) begin
        logic signed [15:0] a, b;
        a = 16'(parent[int'(pbase) + j]);
        b = 16'(parent[int'(pbase) + j + int'(W)]);
        if (!bit_k) res[j] = Q'(sat_q(llr_f(a, b), Q));
        else        res[j] = Q'(sat_q(llr_g(a, b, ps[k][int'(pbase) + j]), Q));
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int j = 0; j < int'(N); j++) lv[j] <= '0;
      end else if (act_q && (int'(lvl_q) == k)) begin
        for (int j = 0; j < int'(W); j++) lv[int'(base) + j] <= res[j];
      end
    end
  end
endmodule
