// dmmr_voter: the voter of a 3-of-M DMMR (distributed minority and majority
// voting redundancy) circuit.
//
// f[0..2] are the outputs of the majority logic group (F1..F3) and
// f[3..M-1] those of the minority logic group (F4..FM). For every bit:
//   MAJ    = F1.F2 + F2.F3 + F1.F3        (majority_voter)
//   MIN    = F4 + F5 + ... + FM            (one M-3 input OR)
//   DMMRO  = MAJ . MIN
// A correct 1 needs two good majority modules and one good minority module; a
// correct 0 needs only two good majority modules, since MAJ = 0 forces DMMRO
// to 0 whatever MIN is. The three equations and the group split follow the
// DMMR scheme as published; replicating the voter for every bit of a WIDTH-bit
// output is this design's choice. Purely combinational.
module dmmr_voter #(
  parameter int unsigned M     = 7,
  parameter int unsigned WIDTH = dmmr_pkg::PROD_W
) (
  input  logic [M-1:0][WIDTH-1:0] f,
  output logic [WIDTH-1:0]        maj,
  output logic [WIDTH-1:0]        min_or,
  output logic [WIDTH-1:0]        dmmro
);

  if (M < dmmr_pkg::M_MIN) begin : g_bad_m
    $error("dmmr_voter: a 3-of-M DMMR circuit needs M >= 5");
  end

  majority_voter #(.WIDTH(WIDTH)) u_maj (
    .f1 (f[0]),
    .f2 (f[1]),
    .f3 (f[2]),
    .maj(maj)
  );

  always_comb begin
    min_or = '0;
    for (int unsigned k = dmmr_pkg::MAJ_GROUP; k < M; k++) begin
      min_or = min_or | f[k];
    end
    dmmro = maj & min_or;
  end

endmodule
