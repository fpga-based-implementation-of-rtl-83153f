// braun_multiplier: unsigned W x W Braun array multiplier, the function module
// of the DMMR circuit.
//
// Partial products pp[i][j] = a[i] & b[j]. Row 1 is W-1 half adders adding
// a[i]b[1] to a[i+1]b[0]. Rows 2..W-1 are carry-save rows of W-1 full adders:
// cell i of row j adds a[i]b[j], the sum of cell i+1 of the row above (the
// leftmost cell takes a[W-1]b[j-1] instead) and the carry of cell i of the row
// above. The least significant product bits leave the array on the right:
// p[0] = a[0]b[0], p[j] = sum of cell 0 of row j. A final ripple row (one half
// adder, then W-2 full adders, the last one taking a[W-1]b[W-1]) merges the
// remaining sums and carries into p[2W-1:W].
//
// For W = 4 the cell types and partial-product labels are exactly those of the
// published 4x4 schematic: half adders on (A3B0,A2B1) (A2B0,A1B1) (A1B0,A0B1),
// full-adder rows taking A3B1..A0B2 and A3B2..A0B3, and a bottom row of
// FA(A3B3) FA HA producing P7/P6, P5, P4. The sum-diagonal / carry-vertical
// wiring is the standard Braun arrangement. Generalising to other W is this
// design's own; W must be at least 3. Purely combinational; the critical path
// runs through W-1 array rows and the W-1 cell ripple row.
module braun_multiplier #(
  parameter int unsigned W = dmmr_pkg::MUL_W
) (
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] p
);

  if (W < 3) begin : g_bad_width
    $error("braun_multiplier: W must be at least 3");
  end

  // Partial products, pp[j][i] = a[i] & b[j].
  logic [W-1:0] pp [W];
  // Sum and carry of cell i in carry-save row j (rows 1..W-1 used).
  logic [W-2:0] s  [W];
  logic [W-2:0] c  [W];
  // Sums and carries of the final ripple row.
  logic [W-2:0] rs;
  logic [W-2:0] rc;

  for (genvar j = 0; j < W; j++) begin : g_pp
    assign pp[j] = a & {W{b[j]}};
  end

  // Row 0 is not built (its "sums" are the b[0] partial products); tie off.
  assign s[0] = '0;
  assign c[0] = '0;

  // Row 1: half adders.
  for (genvar i = 0; i < W - 1; i++) begin : g_row1
    half_adder u_ha (
      .a   (pp[1][i]),
      .b   (pp[0][i+1]),
      .sum (s[1][i]),
      .cout(c[1][i])
    );
  end

  // Rows 2..W-1: carry-save full adders.
  for (genvar j = 2; j < W; j++) begin : g_row
    for (genvar i = 0; i < W - 1; i++) begin : g_cell
      logic sin;
      if (i == W - 2) begin : g_edge
        assign sin = pp[j-1][W-1];
      end else begin : g_inner
        assign sin = s[j-1][i+1];
      end
      full_adder u_fa (
        .a   (pp[j][i]),
        .b   (sin),
        .cin (c[j-1][i]),
        .sum (s[j][i]),
        .cout(c[j][i])
      );
    end
  end

  // Final ripple row.
  for (genvar k = 0; k < W - 1; k++) begin : g_ripple
    logic x;
    if (k == W - 2) begin : g_edge
      assign x = pp[W-1][W-1];
    end else begin : g_inner
      assign x = s[W-1][k+1];
    end
    if (k == 0) begin : g_ha
      half_adder u_ha (
        .a   (x),
        .b   (c[W-1][0]),
        .sum (rs[0]),
        .cout(rc[0])
      );
    end else begin : g_fa
      full_adder u_fa (
        .a   (x),
        .b   (c[W-1][k]),
        .cin (rc[k-1]),
        .sum (rs[k]),
        .cout(rc[k])
      );
    end
  end

  always_comb begin
    p[0] = pp[0][0];
    for (int j = 1; j < W; j++) begin
      p[j] = s[j][0];
    end
    p[2*W-2:W] = rs;
    p[2*W-1]   = rc[W-2];
  end

endmodule
