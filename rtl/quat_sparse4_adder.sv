// quat_sparse4_adder: sparsity-4 logarithmic stage quaternary adder.
//
// Adds two N-qudit numbers a and b and a carry-in cin (0 or 1):
// {cout, s} = a + b + cin, qudit 1 least significant. A sparse carry tree
// (quat_carry_tree with SPARSITY 4, fed by quat_pg cells and the product
// tree) produces only every fourth carry, C_3, C_7, C_11, ... Each of these is
// the carry-in of a small group adder that produces the carries in between
// and the sum qudits:
//     group 0: qudits 1..3,          carry-in cin
//     group k: qudits 4k..4k+3 (cut at N), carry-in C_(4k-1) from the tree
// so the group adders compute C_(4k), C_(4k+1), C_(4k+2). The carry-out is
// the tree's C_N when N+1 is a multiple of 4, otherwise the last group's.
// The tree has fewer nodes and less root congestion than the full carry tree,
// and the groups are short enough that their fan-in or ripple stays small.
//
// Interface: a, b, s packed arrays of N qudits indexed N..1; cin, cout
// qudits holding 0 or 1. GROUP_KIND selects the group adder: BLK_CLA
// (single-stage carry look-ahead, default) or BLK_RIPPLE. Combinational.
// The scheme follows the paper's description; its drawings of this tree were
// not available, so the tree is the paper's carry-tree recursion pruned to the
// wanted carries. N = 8 is the smallest size whose tree yields both the 3rd
// and 7th carries of the paper's example; it is otherwise this design's choice.
module quat_sparse4_adder
  import quat_pkg::*;
#(
  parameter int unsigned N          = 8,
  parameter blk_e        GROUP_KIND = BLK_CLA,
  localparam int unsigned LVL = $clog2(N + 1) - 1,
  localparam int unsigned NC  = (N + 1) / 4,     // tree carries C_3, C_7, ...
  localparam int unsigned NG  = N / 4 + 1        // group adders
) (
  input  qudit_t [N:1] a,
  input  qudit_t [N:1] b,
  input  qudit_t       cin,
  output qudit_t [N:1] s,
  output qudit_t       cout
);

  if (N < 3) begin : g_bad_size
    $error("quat_sparse4_adder: N must be at least 3");
  end
  if (GROUP_KIND == BLK_LOG) begin : g_bad_kind
    $error("quat_sparse4_adder: group adders are BLK_CLA or BLK_RIPPLE");
  end

  qudit_t [N:1]        p, g;
  qudit_t [LVL:0][N:1] pl;
  qudit_t [NC:1]       tc;      // tc[k] = C_(4k-1)
  qudit_t [NG-1:0]     gcin, gcout;

  for (genvar i = 1; i <= N; i++) begin : g_pg
    quat_pg u_pg (.a(a[i]), .b(b[i]), .p(p[i]), .g(g[i]));
  end

  quat_product_tree #(.N(N)) u_ptree (.p(p), .pl(pl));

  quat_carry_tree #(.N(N), .SPARSITY(4)) u_ctree (.g(g), .cin(cin), .pl(pl), .carry(tc));

  for (genvar k = 0; k < NG; k++) begin : g_grp
    localparam int unsigned LO = (k == 0) ? 1 : 4*k;
    localparam int unsigned HI = (4*k + 3 < N) ? 4*k + 3 : N;
    localparam int unsigned W  = HI - LO + 1;

    if (k == 0) begin : g_cin0
      assign gcin[k] = cin;
    end else begin : g_cink
      assign gcin[k] = tc[k];
    end

    if (GROUP_KIND == BLK_RIPPLE) begin : g_rca
      quat_ripple_adder #(.N(W)) u_add
        (.a(a[HI:LO]), .b(b[HI:LO]), .cin(gcin[k]), .s(s[HI:LO]), .cout(gcout[k]));
    end else begin : g_cla
      quat_cla_adder #(.N(W)) u_add
        (.a(a[HI:LO]), .b(b[HI:LO]), .cin(gcin[k]), .s(s[HI:LO]), .cout(gcout[k]));
    end
  end

  if ((N + 1) % 4 == 0) begin : g_cout_tree
    assign cout = tc[NC];
  end else begin : g_cout_grp
    assign cout = gcout[NG-1];
  end

endmodule
