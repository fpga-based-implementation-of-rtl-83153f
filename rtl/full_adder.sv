// full_adder: one-bit full adder, the "Full Adder" cell of the Braun array
// multiplier.
//
// sum = a ^ b ^ cin. The carry is the 3-input majority ab + b.cin + a.cin,
// the same sum-of-products as the majority voter of the DMMR voter. The cell
// name comes from the multiplier schematic; the equations are the textbook
// ones. Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);

  always_comb begin
    sum  = a ^ b ^ cin;
    cout = (a & b) | (b & cin) | (a & cin);
  end

endmodule
