// quat_full_adder: quaternary full adder, eleven gates.
//
// Adds two qudits a, b (0..3) and a carry-in cin (0 or 1) and returns the sum
// qudit s and the carry-out cout (0 or 1): a + b + cin = 4*cout + s.
// All three inputs are taken at once rather than through two cascaded half
// adders (which would take 19 gates and 9 gate delays):
//     t    = a.b + b.cin + cin.a                          (bit-wise majority)
//     s    = a (+) b (+) cin (+) bitswap(t . 1)
//     cout = ( inward_nand(a, b) + t . bitswap_xor(a, b) ) . 1
// The low bit of t is the carry from the low into the high bit of the 2-bit
// sum, which bitswap(t.1) moves into the high bit; inward_nand(a,b) has its low
// bit set when both high bits are 1, and t.bitswap(a(+)b) when that internal
// carry meets exactly one high bit.
//
// Interface: a, b, cin in; s, cout out. cin must be 0 or 1. Combinational; the
// paper counts five gate delays (six with two-input gates).
// The equations and the three sub-circuits follow the paper. Where the text of
// the sum equation reads the bitswap as applied to t alone, the circuit
// diagram applies it to (t . 1); only the latter reproduces the truth table,
// and it is what is built here.
module quat_full_adder
  import quat_pkg::*;
(
  input  qudit_t a,
  input  qudit_t b,
  input  qudit_t cin,
  output qudit_t s,
  output qudit_t cout
);

  qudit_t ab, bc, ca;   // pairwise ANDs
  qudit_t t;            // bit-wise majority of a, b, cin
  qudit_t t1_sw;        // bitswap(t . 1)
  qudit_t ab_in;        // inward NAND of a, b
  qudit_t p_sw;         // bitswap XOR of a, b
  qudit_t t_psw;        // t . bitswap(a (+) b)
  qudit_t c_raw;

  // t, eq. (12a)
  quat_gate #(.OP(OP_AND), .NIN(2)) u_ab (.in({a, b}),        .y(ab));
  quat_gate #(.OP(OP_AND), .NIN(2)) u_bc (.in({b, cin}),      .y(bc));
  quat_gate #(.OP(OP_AND), .NIN(2)) u_ca (.in({cin, a}),      .y(ca));
  quat_gate #(.OP(OP_OR),  .NIN(3)) u_t  (.in({ab, bc, ca}),  .y(t));

  // s, eq. (12b)
  quat_gate #(.OP(OP_BITSWAP_AND), .NIN(2)) u_tsw (.in({t, Q1}),              .y(t1_sw));
  quat_gate #(.OP(OP_XOR),         .NIN(4)) u_s   (.in({a, b, cin, t1_sw}),   .y(s));

  // cout, eq. (12c)
  quat_gate #(.OP(OP_INWARD_NAND), .NIN(2)) u_inw  (.in({a, b}),          .y(ab_in));
  quat_gate #(.OP(OP_BITSWAP_XOR), .NIN(2)) u_swx  (.in({a, b}),          .y(p_sw));
  quat_gate #(.OP(OP_AND),         .NIN(2)) u_tp   (.in({t, p_sw}),       .y(t_psw));
  quat_gate #(.OP(OP_OR),          .NIN(2)) u_or   (.in({ab_in, t_psw}),  .y(c_raw));
  quat_gate #(.OP(OP_AND),         .NIN(2)) u_mask (.in({c_raw, Q1}),     .y(cout));

endmodule
