// quat_carry_tree: logarithmic stage carry tree, full or sparse.
//
// Computes carries from the generates G_1..G_N, the carry-in and the
// power-of-two propagate products of quat_product_tree. A node Q(i,j), i >= j,
// is the carry produced by the run of positions j-1 .. i-1, position 0 being
// the carry-in:
//     Q(i,i) = G_(i-1)      (Q(1,1) = carry-in)
//     Q(i,j) = Q(i, i-m+1) + Q(i-m, j) . P(i-m, i-1),  m = 2^floor(log2(i-j))
// so Q(i,1) is the carry into qudit i, C_(i-1). Each internal node is one AND
// and one OR gate; any node reaches its leaves in floor(log2(i-j)) + 1 steps,
// so an n-qudit tree is about 2*ceil(log2 n) gate delays deep.
//
// SPARSITY selects which carries are produced: output carry[k] is
// Q(k*SPARSITY, 1) = C_(k*SPARSITY - 1), k = 1 .. (N+1)/SPARSITY. With
// SPARSITY = 1 that is every carry C_0..C_N; with SPARSITY = 4 it is
// C_3, C_7, C_11, ... and only the nodes those carries depend on are built
// (the node set is computed at elaboration by walking the recursion down from
// the wanted roots).
//
// Interface: g[N:1] (each 0 or 1), cin (0 or 1), pl from the product tree;
// carry[NC:1] out. Combinational.
// The recursion, the node labels and the 7-qudit example (default N) follow
// the paper. For the sparse tree the paper's own drawings were not available;
// pruning the same recursion to the wanted roots is this implementation's
// reading of "a tree that generates every 4th carry".
module quat_carry_tree
  import quat_pkg::*;
#(
  parameter int unsigned N        = 7,
  parameter int unsigned SPARSITY = 1,
  localparam int unsigned LVL = $clog2(N + 1) - 1,
  localparam int unsigned NC  = (N + 1) / SPARSITY
) (
  input  qudit_t [N:1]        g,
  input  qudit_t              cin,
  input  qudit_t [LVL:0][N:1] pl,
  output qudit_t [NC:1]       carry
);

  localparam int unsigned W = N + 2;   // row stride of the node map

  if (SPARSITY < 1 || NC < 1) begin : g_bad_size
    $error("quat_carry_tree: need SPARSITY >= 1 and N + 1 >= SPARSITY");
  end

  function automatic int unsigned flog2(int unsigned x);
    int unsigned r = 0;
    while ((x >> (r + 1)) != 0) r++;
    return r;
  endfunction

  // need[i*W + j] is set when node Q(i,j) lies under one of the wanted roots.
  function automatic logic [W*W-1:0] need_map();
    logic [W*W-1:0] nm = '0;
    for (int unsigned k = 1; k <= NC; k++) nm[k*SPARSITY*W + 1] = 1'b1;
    for (int unsigned d = N; d >= 1; d--) begin
      for (int unsigned i = d + 1; i <= N + 1; i++) begin
        if (nm[i*W + (i-d)]) begin
          nm[i*W + (i - (1 << flog2(d)) + 1)] = 1'b1;
          nm[(i - (1 << flog2(d)))*W + (i-d)] = 1'b1;
        end
      end
    end
    return nm;
  endfunction

  localparam logic [W*W-1:0] NEED = need_map();

  for (genvar i = 1; i <= N + 1; i++) begin : gi
    for (genvar j = 1; j <= i; j++) begin : gj
      if (NEED[i*W + j]) begin : nd
        qudit_t q;
        if (i == 1) begin : g_cin
          assign q = cin;
        end else if (i == j) begin : g_leaf
          assign q = g[(i > 1) ? i-1 : 1];
        end else begin : g_node
          localparam int unsigned L = flog2(i - j);
          localparam int unsigned M = 1 << L;
          qudit_t lo_p;
          quat_gate #(.OP(OP_AND), .NIN(2)) u_and
            (.in({gi[i-M].gj[j].nd.q, pl[L][i-M]}), .y(lo_p));
          quat_gate #(.OP(OP_OR),  .NIN(2)) u_or
            (.in({gi[i].gj[i-M+1].nd.q, lo_p}), .y(q));
        end
      end
    end
  end

  for (genvar k = 1; k <= NC; k++) begin : g_out
    assign carry[k] = gi[k*SPARSITY].gj[1].nd.q;
  end

endmodule
