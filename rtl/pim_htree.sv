// pim_htree: hierarchical 4-ary H-tree bus between the crossbars.
//
// Crossbars are numbered so that a group at level l is the 4^l crossbars sharing all
// but their l lowest base-4 digits (group 10xx holds 1000..1011). Each group has a
// bus; a switch at each group connects it to its parent's bus. The controller sets
// the isolation level `level`: groups at that level are cut off from their parents,
// so every such group forms an independent bus, and all groups below it are joined
// to it. A word driven by a crossbar (nonzero only from a driving crossbar, so the
// bus is an OR) reaches every crossbar of its isolated group in the same cycle.
// level = 0 leaves each crossbar alone; level = LEVELS joins the whole memory, whose
// root bus also returns read data to the controller (`root`).
//
// Only one crossbar per isolated group may drive in a cycle; the controller derives
// the level from the crossbar step of a move, as the paper describes, and checks this.
// The bus is modelled as wired OR with ideal switches: purely combinational.
module pim_htree
  import pim_pkg::*;
#(
  parameter int unsigned LEVELS = 8,
  parameter int unsigned N      = 32,
  localparam int unsigned NUM   = 4 ** LEVELS
) (
  input  logic [3:0]          level,
  input  logic [NUM-1:0][N-1:0] leaf_out,  // word driven by each crossbar
  output logic [NUM-1:0][N-1:0] leaf_in,   // word seen by each crossbar
  output logic [N-1:0]          root
);

  // up[l][g]: OR of everything driven inside group g of level l
  // dn[l][g]: what the bus of group g at level l carries
  logic [N-1:0] up [LEVELS+1][NUM];
  logic [N-1:0] dn [LEVELS+1][NUM];

  always_comb begin
    for (int unsigned g = 0; g < NUM; g++) up[0][g] = leaf_out[g];
    for (int unsigned l = 1; l <= LEVELS; l++)
      for (int unsigned g = 0; g < NUM; g++)
        if (g < (NUM >> (2*l)))
          up[l][g] = up[l-1][4*g] | up[l-1][4*g+1] | up[l-1][4*g+2] | up[l-1][4*g+3];
        else
          up[l][g] = '0;
    for (int l = int'(LEVELS); l >= 0; l--)
      for (int unsigned g = 0; g < NUM; g++)
        if (32'(level) == 32'(l) || (l == int'(LEVELS) && 32'(level) > LEVELS))
          dn[l][g] = up[l][g];
        else if (32'(l) < 32'(level) && l < int'(LEVELS))
          dn[l][g] = dn[l+1][g >> 2];
        else
          dn[l][g] = '0;
    for (int unsigned g = 0; g < NUM; g++) leaf_in[g] = dn[0][g];
    root = up[LEVELS][0];
  end

endmodule
