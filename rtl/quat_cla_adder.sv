// quat_cla_adder: single-stage parallel (carry look-ahead) quaternary adder.
//
// Adds two N-qudit numbers a and b and a carry-in cin (0 or 1):
// {cout, s} = a + b + cin, qudit 1 least significant. Every carry is the
// fully expanded look-ahead sum over the per-qudit generate and propagate
//     C_i = ( G_i + sum_{k=1}^{i-1} G_k . P_(k+1) ... P_i
//                 + C_0 . P_1 ... P_i ) . 1
// with the generate G_k = (inward(a_k.b_k) + a_k.b_k.bitswap(P*_k)) . 1
// not formed on its own: its two sub-terms enter the product terms
// separately, and the single AND with 1 at the end masks the whole sum.
// Per qudit k five gates form a_k.b_k, P*_k = a_k (+) b_k, bitswap(P*_k),
// inward(a_k.b_k) and P_k = P*_k . bitswap(P*_k). Carry C_i then takes 2i
// AND gates, one (2i+1)-input OR and the AND with 1: 2i + 7 gates and
// i^2 + 5i + 11 gate inputs per carry, largest fan-in 2N + 1, and six gate
// delays from the operands to any carry whatever N is. The sums are formed
// all at once by full-adder cells fed with C_(i-1) (their own carry-out is
// unused).
//
// Interface: a, b, s packed arrays of N qudits indexed N..1; cin, cout
// qudits holding 0 or 1. Combinational.
// The equations, the gate net and the default N = 3 follow the paper's
// 3-qudit single-stage adder; the gate and input counts above are the ones
// the paper gives for it.
module quat_cla_adder
  import quat_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  qudit_t [N:1] a,
  input  qudit_t [N:1] b,
  input  qudit_t       cin,
  output qudit_t [N:1] s,
  output qudit_t       cout
);

  qudit_t [N:1] ab, ps, psw, gin, p;
  qudit_t [N:0] c;       // c[0] = cin, c[i] = carry out of qudit i

  assign c[0] = cin;

  // per-qudit terms
  for (genvar i = 1; i <= N; i++) begin : g_q
    quat_gate #(.OP(OP_AND),     .NIN(2)) u_ab  (.in({a[i], b[i]}),     .y(ab[i]));
    quat_gate #(.OP(OP_XOR),     .NIN(2)) u_ps  (.in({a[i], b[i]}),     .y(ps[i]));
    quat_gate #(.OP(OP_BITSWAP), .NIN(1)) u_psw (.in(ps[i]),            .y(psw[i]));
    quat_gate #(.OP(OP_INWARD),  .NIN(1)) u_gin (.in(ab[i]),            .y(gin[i]));
    quat_gate #(.OP(OP_AND),     .NIN(2)) u_p   (.in({ps[i], psw[i]}),  .y(p[i]));
  end

  // carries
  for (genvar i = 1; i <= N; i++) begin : g_carry
    // term[0]        : inward(a_i.b_i), straight into the OR
    // term[1]        : a_i . b_i . bitswap(P*_i)
    // term[2k], [2k+1]: the two halves of G_k times P_(k+1) .. P_i, k = 1..i-1
    // term[2i]       : cin . P_1 .. P_i
    qudit_t [2*i:0] term;
    qudit_t         c_or;

    assign term[0] = gin[i];
    quat_gate #(.OP(OP_AND), .NIN(2)) u_gab (.in({ab[i], psw[i]}), .y(term[1]));
    for (genvar k = 1; k < i; k++) begin : g_k
      quat_gate #(.OP(OP_AND), .NIN(i-k+1)) u_in
        (.in({p[i:k+1], gin[k]}), .y(term[2*k]));
      quat_gate #(.OP(OP_AND), .NIN(i-k+2)) u_ab
        (.in({p[i:k+1], psw[k], ab[k]}), .y(term[2*k+1]));
    end
    quat_gate #(.OP(OP_AND), .NIN(i+1))   u_cin  (.in({p[i:1], cin}), .y(term[2*i]));
    quat_gate #(.OP(OP_OR),  .NIN(2*i+1)) u_or   (.in(term),          .y(c_or));
    quat_gate #(.OP(OP_AND), .NIN(2))     u_mask (.in({c_or, Q1}),    .y(c[i]));
  end

  for (genvar i = 1; i <= N; i++) begin : g_sum
    qudit_t fa_cout;  // carry of the sum cell, superseded by the look-ahead carry
    quat_full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i-1]), .s(s[i]), .cout(fa_cout));
  end

  assign cout = c[N];

endmodule
