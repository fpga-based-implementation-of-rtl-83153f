// tb_dmmr_voter: self-checking test of the DMMR voter for the three sizes
// 3-of-5, 3-of-6 and 3-of-7. For each size every one-bit input pattern of the
// M module outputs is applied on all bits, then random words. MAJ, MIN and
// DMMRO are compared, bit by bit, with a reference that counts ones in the
// majority group (at least two of F1..F3) and in the minority group (at least
// one of F4..FM).
module tb_dmmr_voter;
  localparam int unsigned WIDTH = 8;
  int checks = 0, failures = 0;

  logic [4:0][WIDTH-1:0] f5;
  logic [5:0][WIDTH-1:0] f6;
  logic [6:0][WIDTH-1:0] f7;
  logic [WIDTH-1:0] maj5, min5, out5, maj6, min6, out6, maj7, min7, out7;

  dmmr_voter #(.M(5), .WIDTH(WIDTH)) dut5 (.f(f5), .maj(maj5), .min_or(min5), .dmmro(out5));
  dmmr_voter #(.M(6), .WIDTH(WIDTH)) dut6 (.f(f6), .maj(maj6), .min_or(min6), .dmmro(out6));
  dmmr_voter #(.M(7), .WIDTH(WIDTH)) dut7 (.f(f7), .maj(maj7), .min_or(min7), .dmmro(out7));

  // Reference for one voter: module k's output word is words[k].
  task automatic check_one(int m, logic [6:0][WIDTH-1:0] words, logic [WIDTH-1:0] maj,
                           logic [WIDTH-1:0] min_or, logic [WIDTH-1:0] dmmro);
    logic [WIDTH-1:0] rmaj, rmin;
    for (int i = 0; i < WIDTH; i++) begin
      int nmaj = 0, nmin = 0;
      for (int k = 0; k < 3; k++) nmaj += int'(words[k][i]);
      for (int k = 3; k < m; k++) nmin += int'(words[k][i]);
      rmaj[i] = nmaj >= 2;
      rmin[i] = nmin >= 1;
    end
    checks++;
    if (maj !== rmaj || min_or !== rmin || dmmro !== (rmaj & rmin)) begin
      failures++;
      $display("FAIL M=%0d maj=%h/%h min=%h/%h out=%h/%h", m, maj, rmaj, min_or, rmin,
               dmmro, rmaj & rmin);
    end
  endtask

  task automatic apply(logic [6:0][WIDTH-1:0] words);
    f5 = words[4:0];
    f6 = words[5:0];
    f7 = words;
    #1;
    check_one(5, words, maj5, min5, out5);
    check_one(6, words, maj6, min6, out6);
    check_one(7, words, maj7, min7, out7);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0][WIDTH-1:0] w;
    for (int v = 0; v < 128; v++) begin
      for (int k = 0; k < 7; k++) w[k] = {WIDTH{v[k]}};
      apply(w);
    end
    for (int n = 0; n < 500; n++) begin
      for (int k = 0; k < 7; k++) w[k] = WIDTH'($urandom);
      apply(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
