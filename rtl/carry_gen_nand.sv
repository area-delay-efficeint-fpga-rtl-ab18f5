// carry_gen_nand: carry-out of A + not(B), built from NAND gates only.
//
// The SAD block has to know which operand is smaller.  A + not(B) with a
// carry-in of 0 equals A - B - 1 + 2^WIDTH, so it carries out exactly when
// A > B.  The carry is found without forming the sum, with the propagate and
// generate part of a carry look-ahead adder written in NAND form:
//   NB = NOT B                       (NB NAND NB)
//   P  = NB OR A  = (NB NAND NB) NAND (A NAND A)
//   G  = NB AND A = (NB NAND A) NAND (NB NAND A)
// Four neighbours j0..j3 (j3 the most significant) are merged into a group:
//   P4 = NOT (P3 NAND P2 NAND P1 NAND P0)      (4-input NAND, then inverted)
//   G4 = NAND( NOT G3, G2 NAND P3, NAND(G1,P3,P2), NAND(G0,P3,P2,P1) )
// These are the equations of the paper for 4-bit groups and one 16-bit
// carry.  For a 32-bit operand the same 4-way merge is simply applied once
// more: 32 bits -> 8 groups -> 2 super-groups -> 1 carry.  That extra level,
// and the padding of short levels with neutral entries (P=1, G=0) at the top,
// are this design's own generalisation.  The carry-out is the generate term
// of the single group left at the top, the carry-in being 0.
//
// Interface: purely combinational, a and b in, carry out.  Depth is
// 3 + 2*LEVELS NAND levels (LEVELS = ceil(log4(WIDTH)), 3 for 32 bits).
module carry_gen_nand
  import gcd_pkg::*;
#(
  parameter int unsigned WIDTH = GCD_WIDTH
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic             carry
);

  // Number of 4-way merge levels and the padded width 4^LEVELS.
  function automatic int unsigned clog4(input int unsigned n);
    int unsigned l, span;
    l = 0;
    span = 1;
    while (span < n) begin
      span = span * 4;
      l++;
    end
    return (l == 0) ? 1 : l;
  endfunction

  localparam int unsigned LEVELS = clog4(WIDTH);
  localparam int unsigned WPAD   = 4 ** LEVELS;

  // p[l][k], g[l][k]: propagate/generate of entry k at level l; level l has
  // WPAD / 4^l entries, the rest of the row is unused.
  logic [WPAD-1:0] p [LEVELS+1];
  logic [WPAD-1:0] g [LEVELS+1];

  // Bit level, with neutral padding above the operand width.
  for (genvar k = 0; k < WPAD; k++) begin : g_bit
    if (k < WIDTH) begin : g_real
      logic nb;
      assign nb      = nand2(b[k], b[k]);
      assign p[0][k] = nand2(nand2(nb, nb), nand2(a[k], a[k]));
      assign g[0][k] = nand2(nand2(nb, a[k]), nand2(nb, a[k]));
    end else begin : g_pad
      assign p[0][k] = 1'b1;
      assign g[0][k] = 1'b0;
    end
  end

  // Group levels.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned N = WPAD / (4 ** l);
    for (genvar k = 0; k < N; k++) begin : g_grp
      logic p0, p1, p2, p3, g0, g1, g2, g3, pn;
      assign {p3, p2, p1, p0} = p[l-1][4*k +: 4];
      assign {g3, g2, g1, g0} = g[l-1][4*k +: 4];
      assign pn      = nand4(p3, p2, p1, p0);
      assign p[l][k] = nand2(pn, pn);
      assign g[l][k] = nand4(nand2(g3, g3),
                             nand2(g2, p3),
                             nand3(g1, p3, p2),
                             nand4(g0, p3, p2, p1));
    end
    if (N < WPAD) begin : g_unused
      assign p[l][WPAD-1:N] = '1;
      assign g[l][WPAD-1:N] = '0;
    end
  end

  assign carry = g[LEVELS][0];

endmodule
