// quat_adder_top: the two large quaternary adder organisations, side by side.
//
// Both adders take the same operands a, b (N qudits, qudit 1 least
// significant, each qudit a 2-bit binary-coded value 0..3) and carry-in cin
// (0 or 1) and each returns a + b + cin:
//   * sum_sparse/cout_sparse from the sparsity-4 adder: a sparse logarithmic
//     carry tree giving every fourth carry, with single-stage look-ahead group
//     adders filling in the rest;
//   * sum_hybrid/cout_hybrid from the block-ripple adder: blocks of BLOCK
//     qudits, each a logarithmic carry-tree adder, with the carry rippling from
//     block to block.
// Together they use every cell of the library: quaternary gates, half and
// full adders, propagate/generate cells, the product and carry trees, and the
// single-stage and logarithmic adders. Both outputs always agree; the paper
// offers the two as alternative ways to build a large adder and names
// neither as the one design, so both are built.
//
// Interface: plain packed qudit arrays; no clock, purely combinational.
// The two organisations are the paper's proposals for large adders; placing
// them in one top, and the sizes N = 8 and BLOCK = 4, are this design's.
module quat_adder_top
  import quat_pkg::*;
#(
  parameter int unsigned N     = 8,
  parameter int unsigned BLOCK = 4
) (
  input  qudit_t [N:1] a,
  input  qudit_t [N:1] b,
  input  qudit_t       cin,
  output qudit_t [N:1] sum_sparse,
  output qudit_t       cout_sparse,
  output qudit_t [N:1] sum_hybrid,
  output qudit_t       cout_hybrid
);

  quat_sparse4_adder #(.N(N), .GROUP_KIND(BLK_CLA)) u_sparse
    (.a(a), .b(b), .cin(cin), .s(sum_sparse), .cout(cout_sparse));

  quat_hybrid_adder #(.N(N), .BLOCK(BLOCK), .BLOCK_KIND(BLK_LOG)) u_hybrid
    (.a(a), .b(b), .cin(cin), .s(sum_hybrid), .cout(cout_hybrid));

endmodule
