// tb_quat_pg: exhaustive self-checking test of the propagate/generate cell.
//
// For all 16 operand pairs: p must be 3 exactly when a + b = 3 and 0
// otherwise; g must be 1 exactly when a + b >= 4 and 0 otherwise.
module tb_quat_pg;
  import quat_pkg::*;

  int checks = 0, failures = 0;
  qudit_t a, b, p, g;

  quat_pg dut (.a(a), .b(b), .p(p), .g(g));

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        a = qudit_t'(i); b = qudit_t'(j);
        #(20);
        checks += 2;
        if (p !== ((i + j == 3) ? 2'd3 : 2'd0)) begin
          failures++;
          $display("FAIL p: a=%0d b=%0d got %0d", i, j, p);
        end
        if (g !== ((i + j >= 4) ? 2'd1 : 2'd0)) begin
          failures++;
          $display("FAIL g: a=%0d b=%0d got %0d", i, j, g);
        end
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
