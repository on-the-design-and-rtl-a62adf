// quat_log_adder: logarithmic stage carry-tree quaternary adder.
//
// Adds two N-qudit numbers a and b and a carry-in cin (0 or 1):
// {cout, s} = a + b + cin, qudit 1 least significant. Three stages:
//   1. per-qudit propagate/generate cells (quat_pg), about 4 gate delays;
//   2. the product tree (quat_product_tree) and, in parallel with it, the
//      carry tree (quat_carry_tree, SPARSITY 1) that yields every carry
//      C_0..C_N in 2*ceil(log2 N) gate delays with fan-in at most 3;
//   3. full adders forming each sum qudit from a_i, b_i and C_(i-1).
// Total carry delay is 4 + 2*ceil(log2 N) gate delays.
//
// Interface: a, b, s packed arrays of N qudits indexed N..1; cin, cout
// qudits holding 0 or 1. Combinational.
// The organisation follows the paper; the default N = 7 is the size of its
// worked example.
module quat_log_adder
  import quat_pkg::*;
#(
  parameter int unsigned N = 7,
  localparam int unsigned LVL = $clog2(N + 1) - 1
) (
  input  qudit_t [N:1] a,
  input  qudit_t [N:1] b,
  input  qudit_t       cin,
  output qudit_t [N:1] s,
  output qudit_t       cout
);

  qudit_t [N:1]        p, g;
  qudit_t [LVL:0][N:1] pl;
  qudit_t [N+1:1]      c;    // c[k] = C_(k-1): carry into qudit k

  for (genvar i = 1; i <= N; i++) begin : g_pg
    quat_pg u_pg (.a(a[i]), .b(b[i]), .p(p[i]), .g(g[i]));
  end

  quat_product_tree #(.N(N)) u_ptree (.p(p), .pl(pl));

  quat_carry_tree #(.N(N), .SPARSITY(1)) u_ctree (.g(g), .cin(cin), .pl(pl), .carry(c));

  for (genvar i = 1; i <= N; i++) begin : g_sum
    qudit_t fa_cout;  // carry of the sum cell, superseded by the tree carry
    quat_full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .s(s[i]), .cout(fa_cout));
  end

  assign cout = c[N+1];

endmodule
