// tb_quat_gate: self-checking test of the quaternary gate cell.
//
// One gate instance per operator, each driven with every pair of input qudits
// (every single qudit for the unary operators). Expected values come from the
// operator table written out below (AND, OR, XOR, NAND, NOR, XNOR for all
// unordered input pairs) and the four inverter transfer curves; compound
// gates are checked as a transfer curve applied to a table entry. Three-input
// AND/OR/XOR instances are checked against the table applied twice.
module tb_quat_gate;
  import quat_pkg::*;

  int checks = 0, failures = 0;

  // transfer curves: basic inverter, inward, outward, bitswap
  localparam qudit_t NOT_T [4] = '{2'd3, 2'd2, 2'd1, 2'd0};
  localparam qudit_t INW_T [4] = '{2'd2, 2'd2, 2'd1, 2'd1};
  localparam qudit_t OUT_T [4] = '{2'd3, 2'd3, 2'd0, 2'd0};
  localparam qudit_t SWP_T [4] = '{2'd0, 2'd2, 2'd1, 2'd3};

  // operator table rows: A, B, AND, OR, XOR, NAND, NOR, XNOR
  localparam int ROWS = 10;
  localparam int TBL [ROWS][8] = '{
    '{0,0, 0,0,0, 3,3,3},
    '{0,1, 0,1,1, 3,2,2},
    '{0,2, 0,2,2, 3,1,1},
    '{0,3, 0,3,3, 3,0,0},
    '{1,1, 1,1,0, 2,2,3},
    '{1,2, 0,3,3, 3,0,0},
    '{1,3, 1,3,2, 2,0,1},
    '{2,2, 2,2,0, 1,1,3},
    '{2,3, 2,3,1, 1,0,2},
    '{3,3, 3,3,0, 0,0,3}
  };

  function automatic int row_of(qudit_t x, qudit_t y);
    for (int r = 0; r < ROWS; r++)
      if ((TBL[r][0] == int'(x) && TBL[r][1] == int'(y)) || (TBL[r][0] == int'(y) && TBL[r][1] == int'(x))) return r;
    return -1;
  endfunction

  function automatic qudit_t t_and(qudit_t x, qudit_t y); return qudit_t'(TBL[row_of(x, y)][2]); endfunction
  function automatic qudit_t t_or (qudit_t x, qudit_t y); return qudit_t'(TBL[row_of(x, y)][3]); endfunction
  function automatic qudit_t t_xor(qudit_t x, qudit_t y); return qudit_t'(TBL[row_of(x, y)][4]); endfunction

  function automatic qudit_t expect2(int op, qudit_t x, qudit_t y);
    int r = row_of(x, y);
    case (op)
      0:  return qudit_t'(TBL[r][2]);
      1:  return qudit_t'(TBL[r][3]);
      2:  return qudit_t'(TBL[r][4]);
      3:  return NOT_T[x];
      4:  return qudit_t'(TBL[r][5]);
      5:  return qudit_t'(TBL[r][6]);
      6:  return qudit_t'(TBL[r][7]);
      7:  return INW_T[x];
      8:  return OUT_T[x];
      9:  return SWP_T[x];
      10: return INW_T[TBL[r][2]];
      11: return OUT_T[TBL[r][2]];
      12: return SWP_T[TBL[r][2]];
      13: return INW_T[TBL[r][3]];
      14: return OUT_T[TBL[r][3]];
      15: return SWP_T[TBL[r][3]];
      16: return INW_T[TBL[r][4]];
      17: return OUT_T[TBL[r][4]];
      18: return SWP_T[TBL[r][4]];
      default: return (x == y) ? 2'd3 : 2'd0;
    endcase
  endfunction

  localparam int NOPS = 20;
  qudit_t x, y, z;
  qudit_t [NOPS-1:0] yo;
  qudit_t and3, or3, xor3;

  for (genvar k = 0; k < NOPS; k++) begin : g_op
    localparam op_e OPK = op_e'(k);
    localparam bit UNARY = (OPK == OP_NOT || OPK == OP_INWARD || OPK == OP_OUTWARD || OPK == OP_BITSWAP);
    if (UNARY) begin : g_u
      quat_gate #(.OP(OPK), .NIN(1)) dut (.in(x), .y(yo[k]));
    end else begin : g_b
      quat_gate #(.OP(OPK), .NIN(2)) dut (.in({x, y}), .y(yo[k]));
    end
  end

  quat_gate #(.OP(OP_AND), .NIN(3)) dut_and3 (.in({x, y, z}), .y(and3));
  quat_gate #(.OP(OP_OR),  .NIN(3)) dut_or3  (.in({x, y, z}), .y(or3));
  quat_gate #(.OP(OP_XOR), .NIN(3)) dut_xor3 (.in({x, y, z}), .y(xor3));

  task automatic check(string what, qudit_t got, qudit_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s x=%0d y=%0d z=%0d: got %0d expected %0d", what, x, y, z, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        for (int l = 0; l < 4; l++) begin
          x = qudit_t'(i); y = qudit_t'(j); z = qudit_t'(l);
          #(20);
          if (l == 0)
            for (int k = 0; k < NOPS; k++)
              check($sformatf("op %0d", k), yo[k], expect2(k, x, y));
          check("and3", and3, t_and(t_and(x, y), z));
          check("or3",  or3,  t_or (t_or (x, y), z));
          check("xor3", xor3, t_xor(t_xor(x, y), z));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
