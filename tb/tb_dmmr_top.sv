// tb_dmmr_top: end-to-end self-checking test of the DMMR multiplier at its
// default size (3-of-7, 4x4 Braun multipliers), with no parameter override.
//
// For every operand pair a, b (256 pairs) and every subset of faulty function
// modules (2^7 subsets) one corruption is applied through the fault-injection
// ports: a random wrong word, all zeros or all ones, chosen in turn. The
// testbench builds its own model of the seven module outputs from a * b and
// the injected faults and checks, bit by bit:
//   - maj, min_or and dmmro against counting ones in the two groups;
//   - dmmro == a * b whenever the fault pattern is within what the scheme
//     masks: at most one faulty module among 1..3 and at least one good
//     module among 4..M.
// It also replays the two worked examples of the scheme (modules 3 and 5..M
// forced to 0, then to 1) and counts how often each mechanism occurred:
// fault-free operation, a masked majority-group fault, masked minority-group
// faults, masking of the full M-3 faults, a wrong MIN hidden by MAJ, and a
// wrong output once the pattern exceeds the tolerance. A mechanism that never
// occurred counts as a failure.
module tb_dmmr_top;
  localparam int unsigned M = 7;
  localparam int unsigned W = 4;
  localparam int unsigned PW = 2 * W;

  logic [W-1:0]         a, b;
  logic [M-1:0][PW-1:0] fault_en, fault_val;
  logic [PW-1:0]        maj, min_or, dmmro;

  int checks = 0, failures = 0;
  int n_fault_free = 0, n_maj_masked = 0, n_min_masked = 0, n_full_tol = 0;
  int n_min_hidden = 0, n_beyond_wrong = 0, n_examples = 0;

  dmmr_top dut (
    .a(a), .b(b), .fault_en(fault_en), .fault_val(fault_val),
    .maj(maj), .min_or(min_or), .dmmro(dmmro)
  );

  function automatic int popcount_range(logic [M-1:0] v, int lo, int hi);
    int n = 0;
    for (int k = lo; k < hi; k++) n += int'(v[k]);
    return n;
  endfunction

  // Apply one fault pattern and check everything.
  task automatic run_case(logic [M-1:0] faulty, logic [M-1:0][PW-1:0] bad);
    logic [PW-1:0] prod;
    logic [M-1:0][PW-1:0] fw;
    logic [PW-1:0] rmaj, rmin;
    int nbad_maj, nbad_min;
    bit tolerable;
    prod = PW'(int'(a) * int'(b));
    for (int k = 0; k < M; k++) begin
      fault_en[k]  = faulty[k] ? '1 : '0;
      fault_val[k] = bad[k];
      fw[k]        = faulty[k] ? bad[k] : prod;
    end
    #1;
    for (int i = 0; i < PW; i++) begin
      int nmaj = 0, nmin = 0;
      for (int k = 0; k < 3; k++) nmaj += int'(fw[k][i]);
      for (int k = 3; k < M; k++) nmin += int'(fw[k][i]);
      rmaj[i] = nmaj >= 2;
      rmin[i] = nmin >= 1;
    end
    checks++;
    if (maj !== rmaj || min_or !== rmin || dmmro !== (rmaj & rmin)) begin
      failures++;
      $display("FAIL model a=%0d b=%0d faulty=%b maj=%h/%h min=%h/%h out=%h/%h", a, b,
               faulty, maj, rmaj, min_or, rmin, dmmro, rmaj & rmin);
    end
    nbad_maj = popcount_range(faulty, 0, 3);
    nbad_min = popcount_range(faulty, 3, M);
    tolerable = (nbad_maj <= 1) && (nbad_min <= M - 4);
    if (tolerable) begin
      checks++;
      if (dmmro !== prod) begin
        failures++;
        $display("FAIL masking a=%0d b=%0d faulty=%b out=%h want=%h", a, b, faulty, dmmro, prod);
      end
    end
    // Mechanism counters, only where a fault actually changed a word.
    if (faulty == '0 && dmmro == prod) n_fault_free++;
    if (tolerable && dmmro == prod) begin
      bit maj_diff = 0, min_diff = 0;
      for (int k = 0; k < 3; k++) if (faulty[k] && bad[k] != prod) maj_diff = 1;
      for (int k = 3; k < M; k++) if (faulty[k] && bad[k] != prod) min_diff = 1;
      if (maj_diff) n_maj_masked++;
      if (min_diff) n_min_masked++;
      if (nbad_maj == 1 && nbad_min == M - 4 && maj_diff && min_diff) n_full_tol++;
      if (min_or != prod) n_min_hidden++;
    end
    if (!tolerable && dmmro != prod) n_beyond_wrong++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [M-1:0][PW-1:0] bad;
    logic [PW-1:0] prod;
    automatic int kind = 0;
    fault_en  = '0;
    fault_val = '0;
    for (int x = 0; x < (1 << W); x++) begin
      for (int y = 0; y < (1 << W); y++) begin
        a = W'(x);
        b = W'(y);
        prod = PW'(x * y);
        for (int s = 0; s < (1 << M); s++) begin
          for (int k = 0; k < M; k++) begin
            case (kind)
              0: bad[k] = prod ^ PW'((($urandom % ((1 << PW) - 1)) + 1));
              1: bad[k] = '0;
              default: bad[k] = '1;
            endcase
          end
          kind = (kind + 1) % 3;
          run_case(M'(s), bad);
        end
      end
    end
    // Worked examples of the scheme on a product with ones and zeros:
    // modules 3 and 5..M corrupted to 0, then to 1; modules 1, 2 and 4 good.
    a = 4'd13;
    b = 4'd11;
    prod = 8'd143;
    for (int v = 0; v < 2; v++) begin
      logic [M-1:0] faulty;
      faulty = '1;
      faulty[0] = 1'b0;
      faulty[1] = 1'b0;
      faulty[3] = 1'b0;
      for (int k = 0; k < M; k++) bad[k] = (v != 0) ? '1 : '0;
      run_case(faulty, bad);
      checks++;
      if (dmmro !== prod) begin
        failures++;
        $display("FAIL worked example %0d: out=%h", v, dmmro);
      end else begin
        n_examples++;
      end
    end
    $display("mechanisms: fault_free=%0d maj_group_masked=%0d min_group_masked=%0d",
             n_fault_free, n_maj_masked, n_min_masked);
    $display("mechanisms: full_tolerance_masked=%0d min_wrong_hidden_by_maj=%0d",
             n_full_tol, n_min_hidden);
    $display("mechanisms: beyond_tolerance_wrong=%0d worked_examples=%0d",
             n_beyond_wrong, n_examples);
    if (n_fault_free == 0 || n_maj_masked == 0 || n_min_masked == 0 || n_full_tol == 0 ||
        n_min_hidden == 0 || n_beyond_wrong == 0 || n_examples != 2) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
