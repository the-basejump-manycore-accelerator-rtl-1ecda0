// bsg_noc_pkg: direction numbering shared by the mesh router, the mesh node and
// the mesh top. The five router ports are numbered P=0 (the attached
// processor/accelerator), W, E, N, S, as in the network's own convention.
// Side links (W,E,N,S) are kept in 4-entry arrays indexed by direction-1.
package bsg_noc_pkg;
  typedef enum logic [2:0] {P = 3'd0, W = 3'd1, E = 3'd2, N = 3'd3, S = 3'd4} Dirs;
  localparam int unsigned dirs_gp = 5;
endpackage
