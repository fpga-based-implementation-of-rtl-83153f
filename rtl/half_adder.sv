// half_adder: one-bit half adder, the "Half Adder" cell of the Braun array
// multiplier.
//
// sum = a ^ b, cout = a & b. The cell name comes from the multiplier schematic;
// the equations are the textbook ones. Purely combinational.
module half_adder (
  input  logic a,
  input  logic b,
  output logic sum,
  output logic cout
);

  always_comb begin
    sum  = a ^ b;
    cout = a & b;
  end

endmodule
