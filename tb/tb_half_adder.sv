// tb_half_adder: exhaustive self-checking test of the half adder cell.
// All four input pairs are applied; sum and carry are compared with the
// arithmetic sum a + b.
module tb_half_adder;
  logic a, b, sum, cout;
  int checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .sum(sum), .cout(cout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b))) begin
        failures++;
        $display("FAIL a=%0b b=%0b -> cout=%0b sum=%0b", a, b, cout, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
