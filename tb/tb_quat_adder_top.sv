// tb_quat_adder_top: end-to-end test of the top with its default sizes.
//
// Drives the top (8 qudits, hybrid blocks of 4) with random operands,
// operands built to give long and word-long propagate runs, all-3 operands and
// random carry-ins. Both the sparsity-4 result and the block-ripple result
// are compared with the integer sum a + b + cin of the operands read as
// 16-bit binary numbers. From the same integer arithmetic the testbench works
// out, for every vector, which carries are 1 and where they came from, and
// counts how often each carry mechanism of the two adders was exercised
// (every gate has a unit delay in simulation, so each vector is given 200
// time units to settle before it is checked):
//   - the sparse tree delivering C_3 = 1 and C_7 = 1 to a group adder,
//   - a group adder producing one of its own carries C_4, C_5, C_6,
//   - a carry leaving block 1 of the hybrid for block 2 (C_4 = 1),
//   - a carry entering block 2 and propagating through all of it,
//   - a carry-in travelling through the whole word to the carry-out,
//   - a carry-out of 1.
// A mechanism never exercised counts as a failure.
module tb_quat_adder_top;
  import quat_pkg::*;

  localparam int N = 8;
  localparam int NVEC = 20000;

  int checks = 0, failures = 0;
  qudit_t [N:1] a, b, sum_sparse, sum_hybrid;
  qudit_t       cin, cout_sparse, cout_hybrid;

  quat_adder_top dut (.*);

  // mechanism counters
  int n_tree_c3, n_tree_c7, n_group_carry, n_block_ripple, n_block_prop, n_word_prop, n_cout;

  task automatic check(string what, logic [17:0] got, logic [17:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%h b=%h cin=%0d: got %h expected %h", what, a, b, cin, got, exp);
    end
  endtask

  initial begin
    n_tree_c3 = 0; n_tree_c7 = 0; n_group_carry = 0; n_block_ripple = 0;
    n_block_prop = 0; n_word_prop = 0; n_cout = 0;
    for (int t = 0; t < NVEC; t++) begin
      logic [17:0] ref_sum;
      int c [0:N];
      bit all_p, blk2_p;
      cin = qudit_t'($urandom % 2);
      for (int i = 1; i <= N; i++) begin
        a[i] = qudit_t'($urandom % 4);
        case (t % 4)
          0: b[i] = qudit_t'($urandom % 4);
          1: b[i] = (($urandom % 4) != 0) ? 2'd3 - a[i] : qudit_t'($urandom % 4);
          2: b[i] = (t < 100) ? 2'd3 - a[i] : qudit_t'($urandom % 4);
          default: b[i] = 2'd3 - a[i] + qudit_t'($urandom % 2);
        endcase
      end
      if (t == 2) cin = 2'd1;
      if (t == 3) begin a = '1; b = '1; cin = 2'd1; end
      ref_sum = 18'(a) + 18'(b) + 18'(cin);

      // carries of the serial recurrence, from the integer digits
      c[0] = int'(cin);
      all_p = 1'b1;
      blk2_p = 1'b1;
      for (int i = 1; i <= N; i++) begin
        c[i] = (int'(a[i]) + int'(b[i]) + c[i-1]) / 4;
        if (int'(a[i]) + int'(b[i]) != 3) begin
          all_p = 1'b0;
          if (i > 4) blk2_p = 1'b0;
        end
      end
      #(200);
      check("sum_sparse",  18'(sum_sparse),  18'(ref_sum[15:0]));
      check("cout_sparse", 18'(cout_sparse), 18'(ref_sum[17:16]));
      check("sum_hybrid",  18'(sum_hybrid),  18'(ref_sum[15:0]));
      check("cout_hybrid", 18'(cout_hybrid), 18'(ref_sum[17:16]));

      if (c[3] == 1) n_tree_c3++;
      if (c[7] == 1) n_tree_c7++;
      if (c[4] == 1 || c[5] == 1 || c[6] == 1) n_group_carry++;
      if (c[4] == 1) n_block_ripple++;
      if (c[4] == 1 && blk2_p) n_block_prop++;
      if (cin == 2'd1 && all_p) n_word_prop++;
      if (c[8] == 1) n_cout++;
    end

    $display("mechanisms: tree C3=%0d tree C7=%0d group carries=%0d block ripple=%0d block propagate=%0d word propagate=%0d carry-out=%0d",
             n_tree_c3, n_tree_c7, n_group_carry, n_block_ripple, n_block_prop, n_word_prop, n_cout);
    checks++; if (n_tree_c3      == 0) begin failures++; $display("FAIL tree carry C3 never 1"); end
    checks++; if (n_tree_c7      == 0) begin failures++; $display("FAIL tree carry C7 never 1"); end
    checks++; if (n_group_carry  == 0) begin failures++; $display("FAIL no group-internal carry"); end
    checks++; if (n_block_ripple == 0) begin failures++; $display("FAIL no block-to-block ripple"); end
    checks++; if (n_block_prop   == 0) begin failures++; $display("FAIL no carry through a whole block"); end
    checks++; if (n_word_prop    == 0) begin failures++; $display("FAIL no word-long propagation"); end
    checks++; if (n_cout         == 0) begin failures++; $display("FAIL carry-out never 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
