// majority_voter: 3-input majority voter of the DMMR majority logic group.
//
// For every bit position: MAJ = F1.F2 + F2.F3 + F1.F3, three AND gates feeding
// one OR gate. The equation is the one of the DMMR scheme; applying it to each
// bit of a WIDTH-bit word (one voter per module output bit) is this design's
// reading of "one voting element per output". Purely combinational.
//
// Interface: f1, f2, f3 are the outputs of function modules 1..3, maj is the
// voted word.
module majority_voter #(
  parameter int unsigned WIDTH = dmmr_pkg::PROD_W
) (
  input  logic [WIDTH-1:0] f1,
  input  logic [WIDTH-1:0] f2,
  input  logic [WIDTH-1:0] f3,
  output logic [WIDTH-1:0] maj
);

  always_comb begin
    maj = (f1 & f2) | (f2 & f3) | (f1 & f3);
  end

endmodule
