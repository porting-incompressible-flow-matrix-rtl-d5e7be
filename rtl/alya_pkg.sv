// alya_pkg: sizes and types shared by the matrix assembly streaming design.
//
// An element of the benchmarks is a linear tetrahedron: 4 nodes of 3 dimensions, so the
// per-element input arrays elvel and elcod and the result elrbu each hold 12 binary64 values,
// and eldtrho / elmurho hold one value per node. External memory is accessed in 512-bit beats
// (8 doubles). Value k of an element array is node k/3, dimension k%3 (the Fortran order of
// elvel(dim,node)); within a packed vector, value k sits in bits [64k+63:64k].
// The node, dimension and beat sizes follow the paper; PGAUS = 4 Gauss points is this design's
// assumption for the tetrahedral elements.
package alya_pkg;
  localparam int PNODE          = 4;
  localparam int NUM_DIMS       = 3;
  localparam int PGAUS          = 4;
  localparam int ELEM_VALS      = PNODE * NUM_DIMS;   // 12
  localparam int HALF_VALS      = ELEM_VALS / 2;      // 6 values per HBM bank per element
  localparam int AXI_DATA_W     = 512;
  localparam int BEAT_BYTES     = AXI_DATA_W / 8;     // 64
  localparam int DOUBLES_PER_BEAT = AXI_DATA_W / 64;  // 8
  localparam int FP_ADD_LATENCY = 7;                  // double add latency quoted by the paper

  typedef logic [63:0]                  fp64_t;
  typedef logic [ELEM_VALS-1:0][63:0]   elem_vec_t;   // elvel, elcod, elrbu of one element
  typedef logic [PNODE-1:0][63:0]       node_vec_t;   // eldtrho, elmurho of one element
  typedef logic [AXI_DATA_W-1:0]        beat_t;

  // Block-level control states of the streaming blocks (ap_ctrl_chain style).
  typedef enum logic [1:0] {CTRL_IDLE, CTRL_RUN, CTRL_DONE} ctrl_state_e;
endpackage
