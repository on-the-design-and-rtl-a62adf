// tb_quat_full_adder: exhaustive self-checking test of the quaternary full adder.
//
// All 32 combinations of two operand qudits and a carry-in of 0 or 1; the
// expected sum and carry-out are the base-4 digits of a + b + cin.
// Every gate has a unit delay in simulation; the settling time of the
// carry-out after each input change is measured, and the largest must be the
// five gate delays of the eleven-gate full adder.
module tb_quat_full_adder;
  import quat_pkg::*;

  int checks = 0, failures = 0;
  qudit_t a, b, cin, s, cout;

  quat_full_adder dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  time t_cout;
  int  dmax = 0;
  initial forever begin @(cout); t_cout = $time; end

  initial begin
    time t0;
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          int sum;
          a = qudit_t'(i); b = qudit_t'(j); cin = qudit_t'(k);
          sum = i + j + k;
          t_cout = $time;
          t0 = $time;
          #(20);
          if (int'(t_cout - t0) > dmax) dmax = int'(t_cout - t0);
          checks += 2;
          if (s !== qudit_t'(sum % 4)) begin
            failures++;
            $display("FAIL s: %0d+%0d+%0d got %0d", i, j, k, s);
          end
          if (cout !== qudit_t'(sum / 4)) begin
            failures++;
            $display("FAIL cout: %0d+%0d+%0d got %0d", i, j, k, cout);
          end
        end
    checks++;
    if (dmax != 5) begin
      failures++;
      $display("FAIL carry-out depth %0d gate delays, expected 5", dmax);
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
