// tb_quat_half_adder: exhaustive self-checking test of the quaternary half adder.
//
// All 16 operand pairs; the expected sum and carry are the base-4 digits of
// the integer a + b.
module tb_quat_half_adder;
  import quat_pkg::*;

  int checks = 0, failures = 0;
  qudit_t a, b, s, c;

  quat_half_adder dut (.a(a), .b(b), .s(s), .c(c));

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        int sum;
        a = qudit_t'(i); b = qudit_t'(j);
        sum = i + j;
        #(20);
        checks += 2;
        if (s !== qudit_t'(sum % 4)) begin
          failures++;
          $display("FAIL s: %0d+%0d got %0d", i, j, s);
        end
        if (c !== qudit_t'(sum / 4)) begin
          failures++;
          $display("FAIL c: %0d+%0d got %0d", i, j, c);
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
