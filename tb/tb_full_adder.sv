// tb_full_adder: exhaustive self-checking test of the full adder cell.
// All eight input combinations are applied; {cout, sum} is compared with the
// arithmetic sum a + b + cin.
module tb_full_adder;
  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0b b=%0b cin=%0b -> cout=%0b sum=%0b", a, b, cin, cout, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
