// quat_ripple_adder: ripple-carry quaternary adder.
//
// Adds two N-qudit numbers a and b and a carry-in cin (0 or 1):
// {cout, s} = a + b + cin, qudit 1 least significant. It is a chain of N full
// adders in which the carry-out of qudit i is the carry-in of qudit i+1, so
// the carry delay grows linearly, five gate delays per qudit.
//
// Interface: a, b, s packed arrays of N qudits indexed N..1; cin, cout
// qudits holding 0 or 1. Combinational.
// The structure is the paper's serial adder. It is used here as one of the
// two group adders the paper allows inside the sparse adder; the default N is
// this implementation's choice.
module quat_ripple_adder
  import quat_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  qudit_t [N:1] a,
  input  qudit_t [N:1] b,
  input  qudit_t       cin,
  output qudit_t [N:1] s,
  output qudit_t       cout
);

  qudit_t [N:0] c;

  assign c[0] = cin;
  for (genvar i = 1; i <= N; i++) begin : g_fa
    quat_full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i-1]), .s(s[i]), .cout(c[i]));
  end
  assign cout = c[N];

endmodule
