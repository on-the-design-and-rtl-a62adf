// quat_half_adder: quaternary half adder, nine gates.
//
// Adds two qudits a and b (0..3) and returns the sum qudit s and the carry c
// (0 or 1), so that a + b = 4*c + s. Seen as 2-bit words, the XOR of the
// operands is the sum except for the internal carry out of the low bit, which
// the bitswap of (a.b.1) moves into the high bit:
//     s = a (+) b (+) bitswap(a.b.1)
//     c = ( inward(a.b) + a.b.bitswap(a (+) b) ) . 1
// inward(a.b) has its low bit set when both high bits are 1; a.b.bitswap(a(+)b)
// has it set when both low bits are 1 and exactly one high bit is; the final
// AND with 1 keeps the low bit only.
//
// Interface: a, b in; s, c out. Combinational; four gate delays to s, five to c.
// The equations and the gate net follow the paper's half adder; gate names
// u_* are this implementation's.
module quat_half_adder
  import quat_pkg::*;
(
  input  qudit_t a,
  input  qudit_t b,
  output qudit_t s,
  output qudit_t c
);

  qudit_t p_star;     // a (+) b
  qudit_t ab;         // a . b
  qudit_t ab1_sw;     // bitswap(a . b . 1)
  qudit_t p_sw;       // bitswap(a (+) b)
  qudit_t ab_in;      // inward(a . b)
  qudit_t ab_psw;     // a . b . bitswap(a (+) b)
  qudit_t c_raw;      // before the final mask with 1

  quat_gate #(.OP(OP_XOR),         .NIN(2)) u_xor   (.in({a, b}),           .y(p_star));
  quat_gate #(.OP(OP_AND),         .NIN(2)) u_and   (.in({a, b}),           .y(ab));
  quat_gate #(.OP(OP_BITSWAP_AND), .NIN(2)) u_swand (.in({ab, Q1}),         .y(ab1_sw));
  quat_gate #(.OP(OP_XOR),         .NIN(2)) u_sum   (.in({p_star, ab1_sw}), .y(s));
  quat_gate #(.OP(OP_BITSWAP),     .NIN(1)) u_swp   (.in(p_star),           .y(p_sw));
  quat_gate #(.OP(OP_INWARD),      .NIN(1)) u_inw   (.in(ab),               .y(ab_in));
  quat_gate #(.OP(OP_AND),         .NIN(2)) u_and2  (.in({ab, p_sw}),       .y(ab_psw));
  quat_gate #(.OP(OP_OR),          .NIN(2)) u_or    (.in({ab_in, ab_psw}),  .y(c_raw));
  quat_gate #(.OP(OP_AND),         .NIN(2)) u_mask  (.in({c_raw, Q1}),      .y(c));

endmodule
