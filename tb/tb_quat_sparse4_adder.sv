// tb_quat_sparse4_adder: self-checking test of the sparsity-4 adder.
//
// Instances of several sizes (8 qudits, the default, then 3, 4, 7, 11, 12,
// 16 and 25) with single-stage look-ahead groups, and of 8 and 13 qudits with
// ripple-carry groups, are driven with random operands, operands giving long
// and word-long propagate runs, all-3 operands and random carry-ins. The
// expected result is the integer sum a + b + cin of the operands read as
// 2N-bit binary numbers, split into the sum word and carry-out.
module tb_quat_sparse4_adder;
  import quat_pkg::*;

  int checks = 0, failures = 0, done = 0;
  localparam int NS = 10;
  localparam int SIZES [NS] = '{8, 3, 4, 7, 11, 12, 16, 25, 8, 13};
  localparam int SETTLE = 200;   // time units (unit gate delays) allowed to settle

  for (genvar z = 0; z < NS; z++) begin : g_sz
    localparam int N = SIZES[z];
    qudit_t [N:1] a, b, s;
    qudit_t       cin, cout;
    time          t_cout;      // time of the latest change of cout
    int           dmax = 0;    // largest operand-to-cout settling time seen

    localparam blk_e K = (z >= 8) ? BLK_RIPPLE : BLK_CLA;
    quat_sparse4_adder #(.N(N), .GROUP_KIND(K)) dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

    initial forever begin @(cout); t_cout = $time; end

    initial begin
      time t0;
      for (int t = 0; t < 2000; t++) begin
        logic [2*N+1:0] ref_sum;
        cin = qudit_t'($urandom % 2);
        for (int i = 1; i <= N; i++) begin
          a[i] = qudit_t'($urandom % 4);
          case (t % 4)
            0: b[i] = qudit_t'($urandom % 4);                          // uniform
            1: b[i] = (($urandom % 6) != 0) ? 2'd3 - a[i] : qudit_t'($urandom % 4); // long propagate runs
            2: b[i] = (t < 4) ? 2'd3 - a[i] : qudit_t'($urandom % 4);  // whole word propagates
            default: b[i] = (t < 8) ? 2'd3 : qudit_t'($urandom % 4);
          endcase
        end
        if (t == 2) cin = 2'd1;
        if (t == 3) begin a = '1; b = '1; cin = 2'd1; end
        ref_sum = (2*N+2)'(a) + (2*N+2)'(b) + (2*N+2)'(cin);
        t_cout = $time;
        t0 = $time;
        #(SETTLE);
        if (int'(t_cout - t0) > dmax) dmax = int'(t_cout - t0);
        checks += 2;
        if (s !== ref_sum[2*N-1:0]) begin
          failures++;
          $display("FAIL N=%0d a=%h b=%h cin=%0d: s=%h expected %h", N, a, b, cin, s, ref_sum[2*N-1:0]);
        end
        if (cout !== ref_sum[2*N+1:2*N]) begin
          failures++;
          $display("FAIL N=%0d a=%h b=%h cin=%0d: cout=%0d expected %0d", N, a, b, cin, cout, ref_sum[2*N+1:2*N]);
        end
      end
      $display("N=%0d sparse: largest carry-out settling time %0d gate delays", N, dmax);
      done++;
    end
  end

  initial begin
    wait (done == NS);
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
