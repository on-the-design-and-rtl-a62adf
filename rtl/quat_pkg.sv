// quat_pkg: shared types and operator functions of the quaternary logic.
//
// A qudit (quaternary digit, values 0..3) is carried on two binary wires as its
// 2-bit binary equivalent: 0=00, 1=01, 2=10, 3=11. With that encoding the basic
// operators AND, OR, XOR and the basic inverter act bit by bit, exactly as their
// Boolean counterparts do on a 2-bit word. The special unary operators are
//   inward (half) inverter : 0->2, 1->2, 2->1, 3->1   (invert, then move a
//                            symmetric value 0/3 to the nearest asymmetric one)
//   outward (full) inverter: 0->3, 1->3, 2->0, 3->0   (invert, then move an
//                            asymmetric value 1/2 to the nearest symmetric one)
//   binary bitswap         : 0->0, 1->2, 2->1, 3->3   (swap the two bits)
// and the equality operator gives 3 when its operands are equal, else 0.
// Compound gates apply a special operator (or the basic inverter) to the
// output of a multi-input basic gate. The operator definitions, the operator
// table and the transfer curves are those of the quaternary algebra the adders
// are built on; the 2-bit encoding is the one that algebra itself uses.
package quat_pkg;

  typedef logic [1:0] qudit_t;

  // One code per gate symbol: basic gates, basic-inverted gates, special
  // unary operators, compound special gates and the equality operator.
  typedef enum logic [4:0] {
    OP_AND,           // A . B . ...
    OP_OR,            // A + B + ...
    OP_XOR,           // A (+) B (+) ...
    OP_NOT,           // basic inverter, 3 - A (unary)
    OP_NAND,          // basic NAND
    OP_NOR,           // basic NOR
    OP_XNOR,          // basic XNOR
    OP_INWARD,        // inward / half inverter (unary)
    OP_OUTWARD,       // outward / full inverter (unary)
    OP_BITSWAP,       // binary bitswap (unary)
    OP_INWARD_NAND,   // inward inverter after AND
    OP_OUTWARD_NAND,  // outward inverter after AND
    OP_BITSWAP_AND,   // bitswap after AND
    OP_INWARD_OR,     // inward inverter after OR
    OP_OUTWARD_OR,    // outward inverter after OR
    OP_BITSWAP_OR,    // bitswap after OR
    OP_INWARD_XNOR,   // inward inverter after XOR
    OP_OUTWARD_XNOR,  // outward inverter after XOR
    OP_BITSWAP_XOR,   // bitswap after XOR
    OP_EQUAL          // 3 if A == B, else 0 (two inputs)
  } op_e;

  // The qudit constant 1, the fixed input of the adders' "AND with 1" masks.
  localparam qudit_t Q1 = 2'd1;

  function automatic qudit_t q_not(qudit_t a);
    return ~a;
  endfunction

  // a' = (not a) . 2 for a < 2, (not a) + 1 for a > 1
  function automatic qudit_t q_inward(qudit_t a);
    return (a < 2'd2) ? (~a & 2'd2) : (~a | 2'd1);
  endfunction

  // a^ = (not a) + 3 for a < 2, (not a) . 0 for a > 1
  function automatic qudit_t q_outward(qudit_t a);
    return (a < 2'd2) ? (~a | 2'd3) : (~a & 2'd0);
  endfunction

  // a~ = not a for asymmetric a (1, 2), a for symmetric a (0, 3)
  function automatic qudit_t q_bitswap(qudit_t a);
    return {a[0], a[1]};
  endfunction

  function automatic qudit_t q_equal(qudit_t a, qudit_t b);
    return (a == b) ? 2'd3 : 2'd0;
  endfunction

  // Kind of sub-adder used inside the groups of the sparse adder and the
  // blocks of the block-ripple adder.
  typedef enum logic [1:0] {
    BLK_RIPPLE,   // ripple-carry chain of full adders
    BLK_CLA,      // single-stage carry look-ahead adder
    BLK_LOG       // logarithmic stage carry-tree adder
  } blk_e;

endpackage
