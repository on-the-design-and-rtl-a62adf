// tb_quat_carry_tree: self-checking test of the full and sparse carry trees.
//
// Trees of 7 qudits with every carry (the default), of 8 and 25 qudits with
// every fourth carry, and of 16 qudits with every carry are driven with random
// generates (0/1), propagates (0/3, biased towards 3 so carries travel far)
// and carry-in. The power-of-two propagate products they need are formed by
// the testbench itself, and every carry output is compared with the serial
// recurrence C_i = G_i + P_i . C_(i-1), C_0 = carry-in. Every gate has a
// unit delay in simulation, and no carry may settle later than two gate
// delays (an AND and an OR) per tree level, floor(log2 N) + 1 levels.
module tb_quat_carry_tree;
  import quat_pkg::*;

  int checks = 0, failures = 0, done = 0;
  localparam int NS = 4;
  localparam int SIZES [NS] = '{7, 8, 25, 16};
  localparam int SPARS [NS] = '{1, 4, 4, 1};

  for (genvar z = 0; z < NS; z++) begin : g_sz
    localparam int N   = SIZES[z];
    localparam int S   = SPARS[z];
    localparam int LVL = $clog2(N + 1) - 1;
    localparam int NC  = (N + 1) / S;
    qudit_t [N:1]        g, p;
    qudit_t              cin;
    qudit_t [LVL:0][N:1] pl;
    qudit_t [NC:1]       carry;

    quat_carry_tree #(.N(N), .SPARSITY(S)) dut (.g(g), .cin(cin), .pl(pl), .carry(carry));

    time t_last;
    int  dmax = 0;
    initial forever begin @(carry); t_last = $time; end

    initial begin
      time t0;
      for (int t = 0; t < 400; t++) begin
        qudit_t c [0:N];
        cin = qudit_t'($urandom % 2);
        for (int i = 1; i <= N; i++) begin
          p[i] = (($urandom % 4) != 0) ? 2'd3 : 2'd0;
          g[i] = (p[i] == 2'd0 && ($urandom % 3) == 0) ? 2'd1 : 2'd0;
        end
        for (int k = 0; k <= LVL; k++)
          for (int i = 1; i <= N; i++) begin
            pl[k][i] = 2'd0;
            if (i + (1 << k) - 1 <= N) begin
              pl[k][i] = 2'd3;
              for (int j = i; j < i + (1 << k); j++) if (p[j] != 2'd3) pl[k][i] = 2'd0;
            end
          end
        c[0] = cin;
        for (int i = 1; i <= N; i++) c[i] = (g[i] == 2'd1 || (p[i] == 2'd3 && c[i-1] == 2'd1)) ? 2'd1 : 2'd0;
        t_last = $time;
        t0 = $time;
        #(50);
        if (int'(t_last - t0) > dmax) dmax = int'(t_last - t0);
        for (int k = 1; k <= NC; k++) begin
          checks++;
          if (carry[k] !== c[k*S - 1]) begin
            failures++;
            $display("FAIL N=%0d S=%0d carry[%0d]=C%0d got %0d expected %0d", N, S, k, k*S-1, carry[k], c[k*S-1]);
          end
        end
      end
      checks++;
      if (dmax > 2 * ($clog2(N + 1))) begin
        failures++;
        $display("FAIL N=%0d S=%0d: carries settled after %0d gate delays, bound %0d", N, S, dmax, 2*$clog2(N+1));
      end
      $display("N=%0d S=%0d: carries settled within %0d gate delays (bound %0d)", N, S, dmax, 2*$clog2(N+1));
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
