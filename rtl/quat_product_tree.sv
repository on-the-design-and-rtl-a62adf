// quat_product_tree: logarithmic tree of propagate products.
//
// Computes the group propagate P(i,j) = P_i . P_(i+1) ... P_j of every run of
// qudits whose length is a power of two, with the recursion
//     P(i,j) = P(i, j-m) . P(j-m+1, j),  m = 2^floor(log2(j-i)),  P(i,i) = P_i
// Level k of the tree holds the runs of length 2^k: pl[k][i] = P(i, i+2^k-1),
// one two-input AND gate per node, n - 2^k + 1 nodes at level k. These are
// exactly the products the carry tree asks for, since every carry-tree node
// combines a run of 2^l generates with the product over that run.
//
// Interface: p[N:1] in (each 0 or 3); pl[LVL:0][N:1] out, LVL = floor(log2 N).
// Entries with i + 2^k - 1 > N do not exist and are driven to 0.
// Combinational, LVL gate delays, evaluated alongside the carry tree.
// The recursion and the node set follow the paper (its example is 7 qudits,
// the default N); storing the nodes level by level is this implementation's.
module quat_product_tree
  import quat_pkg::*;
#(
  parameter int unsigned N   = 7,
  localparam int unsigned LVL = $clog2(N + 1) - 1
) (
  input  qudit_t [N:1]          p,
  output qudit_t [LVL:0][N:1]   pl
);

  assign pl[0] = p;

  for (genvar k = 1; k <= LVL; k++) begin : g_lvl
    localparam int unsigned H = 1 << (k - 1);   // half run length
    for (genvar i = 1; i <= N; i++) begin : g_node
      if (i + 2*H - 1 <= N) begin : g_and
        quat_gate #(.OP(OP_AND), .NIN(2)) u_and (.in({pl[k-1][i], pl[k-1][i+H]}), .y(pl[k][i]));
      end else begin : g_none
        assign pl[k][i] = 2'd0;
      end
    end
  end

endmodule
