// quat_pg: propagate and generate of one qudit position.
//
// For operand qudits a and b:
//     p_star = a (+) b
//     p      = p_star . bitswap(p_star)   3 when a + b = 3, else 0
//     g      = half-adder carry of a, b   1 when a + b >= 4, else 0
// p = 3 means an incoming carry passes through this position (a + b = 3 is
// the only case where a + b + 1 carries but a + b does not); g = 1 means the
// position carries whatever comes in. Because p is 0 or 3 and g is 0 or 1, the
// carry recurrences c_i = g_i + p_i . c_(i-1) stay within 0 and 1.
//
// Interface: a, b in; p (0 or 3) and g (0 or 1) out. Combinational; p after
// three gate delays, g after five.
// The equations follow the paper. The generate is taken from a half adder
// instance, since the paper defines it as the half adder's carry; its sum
// output is not used here and synthesis removes that part.
module quat_pg
  import quat_pkg::*;
(
  input  qudit_t a,
  input  qudit_t b,
  output qudit_t p,
  output qudit_t g
);

  qudit_t p_star, p_sw;
  qudit_t ha_s;   // half-adder sum, not needed for g

  quat_gate #(.OP(OP_XOR),     .NIN(2)) u_xor (.in({a, b}),          .y(p_star));
  quat_gate #(.OP(OP_BITSWAP), .NIN(1)) u_sw  (.in(p_star),          .y(p_sw));
  quat_gate #(.OP(OP_AND),     .NIN(2)) u_p   (.in({p_star, p_sw}),  .y(p));

  quat_half_adder u_gen (.a(a), .b(b), .s(ha_s), .c(g));

endmodule
