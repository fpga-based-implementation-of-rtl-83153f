// tb_dmmr_workloads: the three DMMR circuits of the evaluation, 3-of-5, 3-of-6
// and 3-of-7 with 4x4 Braun multipliers, each driven by a fault-injection
// campaign (dmmr_campaign) at its full fault tolerance of 2, 3 and 4 faulty
// modules. Every circuit must mask all of its campaign's patterns and must
// lose the product once every minority module has failed.
module tb_dmmr_workloads;
  logic done5, done6, done7;
  int c5, c6, c7, f5, f6, f7, m5, m6, m7, l5, l6, l7;
  int checks = 0, failures = 0;

  dmmr_campaign #(.M(5)) u5 (.done(done5), .checks(c5), .failures(f5), .masked(m5), .lost(l5));
  dmmr_campaign #(.M(6)) u6 (.done(done6), .checks(c6), .failures(f6), .masked(m6), .lost(l6));
  dmmr_campaign #(.M(7)) u7 (.done(done7), .checks(c7), .failures(f7), .masked(m7), .lost(l7));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done5 && done6 && done7);
    checks = c5 + c6 + c7;
    failures = f5 + f6 + f7;
    $display("3-of-5: %0d patterns with 2 faulty modules masked, beyond-tolerance loss seen %0d", m5, l5);
    $display("3-of-6: %0d patterns with 3 faulty modules masked, beyond-tolerance loss seen %0d", m6, l6);
    $display("3-of-7: %0d patterns with 4 faulty modules masked, beyond-tolerance loss seen %0d", m7, l7);
    checks += 3;
    if (m5 == 0 || l5 != 1) failures++;
    if (m6 == 0 || l6 != 1) failures++;
    if (m7 == 0 || l7 != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
