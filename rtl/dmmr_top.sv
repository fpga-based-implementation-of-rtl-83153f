// dmmr_top: fault-tolerant 4x4 multiplier built as a 3-of-M DMMR circuit.
//
// M identical Braun array multipliers (the function modules) receive the same
// operands a and b. Their products F1..FM go to the DMMR voter: modules 1..3
// are voted 2-of-3 into MAJ, modules 4..M are ORed into MIN, and the output is
// DMMRO = MAJ & MIN, bit by bit. With at most one faulty module among 1..3 and
// at least one good module among 4..M the product on dmmro is correct, so up
// to M-3 module faults are masked (2, 3, 4 for M = 5, 6, 7). This structure,
// the multiplier and the sizes follow the published DMMR scheme.
//
// fault_en / fault_val are this design's own fault-injection hooks: where a
// bit of fault_en[k] is set, bit of module k+1's output is replaced by the same
// bit of fault_val[k] before the voter. They let any corruption of any module
// output be applied in simulation or on a board; tie fault_en to zero in
// service, and synthesis then removes the multiplexers. maj and min_or expose
// the two intermediate signals of the voter.
//
// Purely combinational: no clock, no reset; outputs settle one multiplier plus
// one voter delay after the inputs change.
module dmmr_top #(
  parameter int unsigned M = 7,
  parameter int unsigned W = dmmr_pkg::MUL_W
) (
  input  logic [W-1:0]            a,
  input  logic [W-1:0]            b,
  input  logic [M-1:0][2*W-1:0]   fault_en,
  input  logic [M-1:0][2*W-1:0]   fault_val,
  output logic [2*W-1:0]          maj,
  output logic [2*W-1:0]          min_or,
  output logic [2*W-1:0]          dmmro
);

  // Fault-free and (possibly) corrupted function module outputs F1..FM.
  logic [M-1:0][2*W-1:0] f_raw;
  logic [M-1:0][2*W-1:0] f;

  for (genvar k = 0; k < M; k++) begin : g_fm
    braun_multiplier #(.W(W)) u_fm (
      .a(a),
      .b(b),
      .p(f_raw[k])
    );
    assign f[k] = (f_raw[k] & ~fault_en[k]) | (fault_val[k] & fault_en[k]);
  end

  dmmr_voter #(.M(M), .WIDTH(2 * W)) u_voter (
    .f     (f),
    .maj   (maj),
    .min_or(min_or),
    .dmmro (dmmro)
  );

endmodule
