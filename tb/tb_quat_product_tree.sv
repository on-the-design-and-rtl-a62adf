// tb_quat_product_tree: self-checking test of the propagate product tree.
//
// Two trees, 7 qudits (the default) and 12 qudits, are driven with random
// propagate vectors (each P_i 0 or 3, biased towards 3 so long runs occur)
// and with all-3 and all-0 vectors. Every existing node pl[k][i] must be 3
// exactly when P_i .. P_(i+2^k-1) are all 3; absent nodes must be 0.
module tb_quat_product_tree;
  import quat_pkg::*;

  int checks = 0, failures = 0, done = 0;
  localparam int NS = 2;
  localparam int SIZES [NS] = '{7, 12};

  for (genvar z = 0; z < NS; z++) begin : g_sz
    localparam int N   = SIZES[z];
    localparam int LVL = $clog2(N + 1) - 1;
    qudit_t [N:1]        p;
    qudit_t [LVL:0][N:1] pl;

    quat_product_tree #(.N(N)) dut (.p(p), .pl(pl));

    initial begin
      for (int t = 0; t < 300; t++) begin
        for (int i = 1; i <= N; i++)
          p[i] = (t == 0) ? 2'd3 : (t == 1) ? 2'd0 : (($urandom % 8) != 0) ? 2'd3 : 2'd0;
        #(20);
        for (int k = 0; k <= LVL; k++)
          for (int i = 1; i <= N; i++) begin
            qudit_t exp;
            if (i + (1 << k) - 1 > N) exp = 2'd0;
            else begin
              exp = 2'd3;
              for (int j = i; j < i + (1 << k); j++) if (p[j] != 2'd3) exp = 2'd0;
            end
            checks++;
            if (pl[k][i] !== exp) begin
              failures++;
              $display("FAIL N=%0d pl[%0d][%0d] got %0d expected %0d", N, k, i, pl[k][i], exp);
            end
          end
      end
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
