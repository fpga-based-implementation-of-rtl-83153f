// dmmr_pkg: constants shared by the 3-of-M DMMR (distributed minority and
// majority voting redundancy) multiplier.
//
// A 3-of-M DMMR circuit has M identical function modules. Modules 1..3 form
// the majority logic group, voted 2-of-3; modules 4..M form the minority logic
// group, combined by an OR. The smallest legal circuit is 3-of-5. The function
// module used here is an unsigned W x W Braun array multiplier, W = 4 as in the
// original evaluation. Nothing here is clocked.
package dmmr_pkg;

  // Size of the majority logic group (the "3" of 3-of-M).
  localparam int unsigned MAJ_GROUP = 3;

  // Smallest number of function modules of a 3-of-M circuit (3-of-5).
  localparam int unsigned M_MIN = 5;

  // Operand width of the representative function module (4x4 multiplier).
  localparam int unsigned MUL_W = 4;

  // Product width of that function module.
  localparam int unsigned PROD_W = 2 * MUL_W;

  // Number of module faults a 3-of-M circuit masks when at most one of them
  // lies in the majority group: one in the majority group plus all but one
  // of the M-3 minority modules.
  function automatic int unsigned dmmr_tolerance(int unsigned m);
    return m - MAJ_GROUP;
  endfunction

endpackage
