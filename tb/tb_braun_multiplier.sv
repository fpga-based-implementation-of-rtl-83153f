// tb_braun_multiplier: exhaustive self-checking test of the Braun array
// multiplier. The 4x4 instance (the size used by the DMMR circuit) and a 5x5
// instance (the generic array) are driven with every operand pair and their
// products compared with the integer product a * b.
module tb_braun_multiplier;
  logic [3:0] a4, b4;
  logic [7:0] p4;
  logic [4:0] a5, b5;
  logic [9:0] p5;
  int checks = 0, failures = 0;

  braun_multiplier #(.W(4)) dut4 (.a(a4), .b(b4), .p(p4));
  braun_multiplier #(.W(5)) dut5 (.a(a5), .b(b5), .p(p5));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 16; x++) begin
      for (int y = 0; y < 16; y++) begin
        a4 = 4'(x);
        b4 = 4'(y);
        #1;
        checks++;
        if (int'(p4) != x * y) begin
          failures++;
          $display("FAIL 4x4: %0d * %0d -> %0d", x, y, p4);
        end
      end
    end
    for (int x = 0; x < 32; x++) begin
      for (int y = 0; y < 32; y++) begin
        a5 = 5'(x);
        b5 = 5'(y);
        #1;
        checks++;
        if (int'(p5) != x * y) begin
          failures++;
          $display("FAIL 5x5: %0d * %0d -> %0d", x, y, p5);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
