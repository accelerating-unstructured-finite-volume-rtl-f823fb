// fv_pkg: record types shared by the finite volume processor.
//
// A node (one triangle of the cell-centred mesh) is held on chip as seven
// floating-point words: the conservative state rho, rho*u, rho*v, E, the
// triangle area as the constant part, and the pressure p and speed of sound
// c that are computed once when the node is loaded. With double words this
// is the 56-byte Memory unit word. A face descriptor carries the stream
// index of the neighbouring triangle, the "next node" bit that marks the
// last face of a node, and three words of face geometry.
package fv_pkg;
  import fp_pkg::*;

  localparam int unsigned IDX_W = 24;  // neighbour index width (8M nodes)
  localparam int unsigned FACES = 3;   // faces per triangle

  typedef struct packed {
    fp_t rho;
    fp_t mu;    // rho*u
    fp_t mv;    // rho*v
    fp_t e;     // total energy density E
  } state_t;

  // Node data as it arrives from off-chip memory.
  typedef struct packed {
    logic   ex;    // 1: update this node, 0: load it only (ghost copy)
    state_t u;
    fp_t    area;
  } node_in_t;

  // Node record in the Memory unit.
  typedef struct packed {
    state_t u;
    fp_t    area;
    fp_t    p;
    fp_t    c;
  } node_rec_t;

  // One face of the node being updated.
  typedef struct packed {
    logic             last;  // next-node bit: last face of this node
    logic [IDX_W-1:0] idx;   // stream position of the neighbour
    fp_t              nx;    // unit normal, x
    fp_t              ny;    // unit normal, y
    fp_t              len;   // face length |n|
  } face_desc_t;

  // Neighbourhood memory entry: the neighbour's record and its face geometry.
  typedef struct packed {
    node_rec_t nb;
    fp_t       nx;
    fp_t       ny;
    fp_t       len;
  } nbh_entry_t;

endpackage
