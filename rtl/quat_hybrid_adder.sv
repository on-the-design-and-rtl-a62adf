// quat_hybrid_adder: block-ripple quaternary adder with in-block parallel adders.
//
// Adds two N-qudit numbers a and b and a carry-in cin (0 or 1):
// {cout, s} = a + b + cin, qudit 1 least significant. The operands are cut
// into blocks of BLOCK qudits (the last block takes what is left). Inside a
// block, carries and sums come from a parallel adder; between blocks the carry
// ripples, the carry-out of block b being the carry-in of block b+1. The delay
// grows with the number of blocks rather than the number of qudits, while each
// parallel adder stays small, keeping its fan-in (single-stage) or depth
// (carry tree) low.
//
// Interface: a, b, s packed arrays of N qudits indexed N..1; cin, cout
// qudits holding 0 or 1. BLOCK_KIND selects the in-block adder: BLK_LOG
// (logarithmic stage carry-tree, default) or BLK_CLA (single-stage).
// Combinational.
// Block rippling with parallel adders inside follows the paper; its drawing
// of this scheme was not available, and N = 8, BLOCK = 4 and the default
// block kind are this design's choices.
module quat_hybrid_adder
  import quat_pkg::*;
#(
  parameter int unsigned N          = 8,
  parameter int unsigned BLOCK      = 4,
  parameter blk_e        BLOCK_KIND = BLK_LOG,
  localparam int unsigned NB = (N + BLOCK - 1) / BLOCK
) (
  input  qudit_t [N:1] a,
  input  qudit_t [N:1] b,
  input  qudit_t       cin,
  output qudit_t [N:1] s,
  output qudit_t       cout
);

  if (BLOCK_KIND == BLK_RIPPLE) begin : g_bad_kind
    $error("quat_hybrid_adder: in-block adders are BLK_LOG or BLK_CLA");
  end

  qudit_t [NB:0] bc;   // bc[b] = carry into block b

  assign bc[0] = cin;

  for (genvar k = 0; k < NB; k++) begin : g_blk
    localparam int unsigned LO = k*BLOCK + 1;
    localparam int unsigned HI = ((k+1)*BLOCK < N) ? (k+1)*BLOCK : N;
    localparam int unsigned W  = HI - LO + 1;
    if (BLOCK_KIND == BLK_CLA) begin : g_cla
      quat_cla_adder #(.N(W)) u_add
        (.a(a[HI:LO]), .b(b[HI:LO]), .cin(bc[k]), .s(s[HI:LO]), .cout(bc[k+1]));
    end else begin : g_log
      quat_log_adder #(.N(W)) u_add
        (.a(a[HI:LO]), .b(b[HI:LO]), .cin(bc[k]), .s(s[HI:LO]), .cout(bc[k+1]));
    end
  end

  assign cout = bc[NB];

endmodule
