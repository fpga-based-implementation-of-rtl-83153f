// tb_majority_voter: self-checking test of the bitwise 3-input majority
// voter. Every one-bit input combination is applied on all bits at once, then
// random words; each output bit is compared with a count of ones (at least two
// of three inputs set).
module tb_majority_voter;
  localparam int unsigned WIDTH = 8;
  logic [WIDTH-1:0] f1, f2, f3, maj;
  int checks = 0, failures = 0;

  majority_voter #(.WIDTH(WIDTH)) dut (.f1(f1), .f2(f2), .f3(f3), .maj(maj));

  function automatic logic [WIDTH-1:0] ref_maj(logic [WIDTH-1:0] x, logic [WIDTH-1:0] y,
                                               logic [WIDTH-1:0] z);
    logic [WIDTH-1:0] r;
    for (int i = 0; i < WIDTH; i++) begin
      r[i] = (int'(x[i]) + int'(y[i]) + int'(z[i])) >= 2;
    end
    return r;
  endfunction

  task automatic check();
    #1;
    checks++;
    if (maj !== ref_maj(f1, f2, f3)) begin
      failures++;
      $display("FAIL f1=%h f2=%h f3=%h -> maj=%h", f1, f2, f3, maj);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      f1 = {WIDTH{v[0]}};
      f2 = {WIDTH{v[1]}};
      f3 = {WIDTH{v[2]}};
      check();
    end
    for (int n = 0; n < 500; n++) begin
      f1 = WIDTH'($urandom);
      f2 = WIDTH'($urandom);
      f3 = WIDTH'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
