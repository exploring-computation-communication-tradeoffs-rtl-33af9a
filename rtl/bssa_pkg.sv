// bssa_pkg: types of the bilateral-space stereo (BSSA) filter accelerator.
//
// A grid vertex record holds the six neighbour values the compute unit's
// three first-level adders take pairwise, and three per-vertex coefficients:
// a (multiplies the neighbour sum), b (added after the x8 scaling) and w
// (applied twice at the end). All values are IEEE-754 single precision. The
// grouping into six neighbours and three coefficients is read from the
// compute-unit diagram; which quantity of the solver each one carries is not
// given there and is left to the host software.
package bssa_pkg;

  localparam int unsigned FPW = 32;

  typedef struct packed {
    logic [5:0][FPW-1:0] nbr;   // nbr[0]+nbr[1], nbr[2]+nbr[3], nbr[4]+nbr[5]
    logic [FPW-1:0]      a;
    logic [FPW-1:0]      b;
    logic [FPW-1:0]      w;
  } vertex_t;                    // 288 bits

  localparam int unsigned CU_LATENCY = 7;

endpackage
