// dmmr_campaign: fault-injection campaign on one 3-of-M DMMR multiplier, used
// by tb_dmmr_workloads to run the 3-of-5, 3-of-6 and 3-of-7 circuits side by
// side.
//
// For NCASE random operand pairs it picks a random set of exactly M-3 faulty
// modules with at most one of them among modules 1..3 (the largest pattern
// the scheme masks; every fourth case leaves the majority group intact) and gives each a random wrong output word; the product on
// dmmro must still equal a * b. It also applies a pattern of M-2 faults that
// puts every minority module at 0 and checks, against the group-counting
// model, that a product with ones is then lost, showing where the tolerance
// ends. Results are reported on the ports when done rises.
module dmmr_campaign #(
  parameter int unsigned M     = 7,
  parameter int unsigned NCASE = 2000
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   masked,
  output int   lost
);
  localparam int unsigned W  = 4;
  localparam int unsigned PW = 2 * W;

  logic [W-1:0]         a, b;
  logic [M-1:0][PW-1:0] fault_en, fault_val;
  logic [PW-1:0]        maj, min_or, dmmro;

  dmmr_top #(.M(M)) dut (
    .a(a), .b(b), .fault_en(fault_en), .fault_val(fault_val),
    .maj(maj), .min_or(min_or), .dmmro(dmmro)
  );

  initial begin
    logic [PW-1:0] prod;
    logic [M-1:0] faulty;
    done = 1'b0;
    checks = 0;
    failures = 0;
    masked = 0;
    lost = 0;
    for (int n = 0; n < int'(NCASE); n++) begin
      automatic int nfault = 0;
      automatic int good = 0;
      a = W'($urandom);
      b = W'($urandom);
      prod = PW'(int'(a) * int'(b));
      // One majority module (none in every fourth case) and every minority
      // module but one randomly chosen good one.
      faulty = '0;
      good = 3 + int'($urandom % (M - 3));
      for (int k = 3; k < int'(M); k++) faulty[k] = (k != good);
      nfault = int'(M) - 4;
      if (n % 4 != 0) begin
        faulty[$urandom % 3] = 1'b1;
        nfault++;
      end
      for (int k = 0; k < int'(M); k++) begin
        fault_en[k]  = faulty[k] ? '1 : '0;
        fault_val[k] = prod ^ PW'(($urandom % ((1 << PW) - 1)) + 1);
      end
      #1;
      checks++;
      if (dmmro !== prod) begin
        failures++;
        $display("FAIL 3-of-%0d a=%0d b=%0d faulty=%b out=%0d", M, a, b, faulty, dmmro);
      end else if (nfault == int'(M) - 3) begin
        masked++;
      end
    end
    // Beyond the tolerance: every minority module stuck at 0 and one majority
    // module wrong; a product with ones in it must then read 0.
    a = 4'd15;
    b = 4'd15;
    fault_en = '0;
    fault_val = '0;
    for (int k = 3; k < int'(M); k++) fault_en[k] = '1;
    fault_en[0] = '1;
    #1;
    checks++;
    if (dmmro !== '0 || min_or !== '0 || maj !== 8'd225) begin
      failures++;
      $display("FAIL 3-of-%0d beyond tolerance: out=%0d maj=%0d", M, dmmro, maj);
    end else begin
      lost++;
    end
    done = 1'b1;
  end
endmodule
