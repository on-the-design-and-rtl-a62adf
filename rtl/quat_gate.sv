// quat_gate: one quaternary logic gate, of the kind selected by OP.
//
// This is the cell library of the adders: every gate drawn in their circuit
// diagrams is one instance of this module. A multi-input basic gate (AND, OR,
// XOR) reduces its NIN inputs bit-wise over the 2-bit qudit encoding; a
// compound gate then applies the basic inverter, the inward or outward
// inverter or the bitswap to that result; a unary operator uses in[0] only;
// the equality operator compares in[0] with in[1].
//
// Interface: in is a packed array of NIN qudits, y one qudit. Combinational.
// In simulation the output follows the inputs after one time unit, so that a
// testbench can read logic depth off the settling time of a circuit: the
// adders' delays are counted in unit gate delays, every gate alike, bitswap
// and the other unary operators included. Synthesis ignores the delay.
// The operator set and definitions follow the quaternary algebra (operator
// table, gate symbols and transfer curves); bundling them into a single
// parameterised cell is a choice of this implementation.
module quat_gate
  import quat_pkg::*;
#(
  parameter op_e         OP  = OP_AND,
  parameter int unsigned NIN = 2
) (
  input  qudit_t [NIN-1:0] in,
  output qudit_t           y
);

  qudit_t and_r, or_r, xor_r;
  qudit_t y_c;   // gate function, before the unit delay

  always_comb begin
    and_r = 2'b11;
    or_r  = 2'b00;
    xor_r = 2'b00;
    for (int unsigned k = 0; k < NIN; k++) begin
      and_r = and_r & in[k];
      or_r  = or_r  | in[k];
      xor_r = xor_r ^ in[k];
    end
  end

  always_comb begin
    unique case (OP)
      OP_AND:          y_c = and_r;
      OP_OR:           y_c = or_r;
      OP_XOR:          y_c = xor_r;
      OP_NOT:          y_c = q_not(in[0]);
      OP_NAND:         y_c = q_not(and_r);
      OP_NOR:          y_c = q_not(or_r);
      OP_XNOR:         y_c = q_not(xor_r);
      OP_INWARD:       y_c = q_inward(in[0]);
      OP_OUTWARD:      y_c = q_outward(in[0]);
      OP_BITSWAP:      y_c = q_bitswap(in[0]);
      OP_INWARD_NAND:  y_c = q_inward(and_r);
      OP_OUTWARD_NAND: y_c = q_outward(and_r);
      OP_BITSWAP_AND:  y_c = q_bitswap(and_r);
      OP_INWARD_OR:    y_c = q_inward(or_r);
      OP_OUTWARD_OR:   y_c = q_outward(or_r);
      OP_BITSWAP_OR:   y_c = q_bitswap(or_r);
      OP_INWARD_XNOR:  y_c = q_inward(xor_r);
      OP_OUTWARD_XNOR: y_c = q_outward(xor_r);
      OP_BITSWAP_XOR:  y_c = q_bitswap(xor_r);
      OP_EQUAL:        y_c = q_equal(in[0], in[NIN > 1 ? 1 : 0]);
      default:         y_c = 2'b00;
    endcase
  end

  assign #1 y = y_c;

endmodule
