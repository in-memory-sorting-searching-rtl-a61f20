// cayley_pkg: types, constants and tree-geometry functions shared by the
// Cayley-tree in-memory computing (IMC) platform.
//
// The tree has one root at level 0. The root has ETA+1 children; every other
// non-leaf node has ETA children; all leaves sit at level H-1, so H counts the
// levels (a tree of "height 3" has levels 0, 1 and 2). Nodes are numbered in
// breadth-first order: node 0 is the root, nodes 1..ETA+1 are level 1, and so
// on. The node count follows the paper's Proposition 1:
//   n = 1 + (ETA+1) * (1 + ETA + ... + ETA^(H-2)).
// The functions below are constant functions, used to size arrays and to
// place nodes in generate loops.
package cayley_pkg;

  // Operation broadcast to every node. OP_IDENT is phase 1 of the search
  // only (the key is spread and compared, the match flags stay where they
  // are): the sorting loop uses it to find the nodes holding the reported
  // value. The encoding is this design's own.
  typedef enum logic [2:0] {
    OP_IDLE   = 3'd0,
    OP_SEARCH = 3'd1,
    OP_IDENT  = 3'd2,
    OP_MAX    = 3'd3,
    OP_MIN    = 3'd4
  } imc_op_e;

  // Commands accepted by the platform.
  typedef enum logic [2:0] {
    CMD_SEARCH    = 3'd0,
    CMD_MAX       = 3'd1,
    CMD_MIN       = 3'd2,
    CMD_SORT_DESC = 3'd3,
    CMD_SORT_ASC  = 3'd4
  } imc_cmd_e;

  // Number of nodes on level d (d >= 1).
  function automatic int unsigned level_size(int unsigned eta, int unsigned d);
    int unsigned s;
    s = eta + 1;
    for (int unsigned k = 1; k < d; k++) s = s * eta;
    return (d == 0) ? 1 : s;
  endfunction

  // Index of the first node of level d.
  function automatic int unsigned level_first(int unsigned eta, int unsigned d);
    int unsigned f;
    f = 0;
    for (int unsigned k = 0; k < d; k++) f = f + level_size(eta, k);
    return f;
  endfunction

  // Number of nodes of a tree with h levels (Proposition 1).
  function automatic int unsigned num_nodes(int unsigned eta, int unsigned h);
    return level_first(eta, h);
  endfunction

  // Level of node i.
  function automatic int unsigned node_level(int unsigned eta, int unsigned h,
                                             int unsigned i);
    int unsigned lv;
    lv = 0;
    for (int unsigned d = 1; d < h; d++)
      if (i >= level_first(eta, d)) lv = d;
    return lv;
  endfunction

  // Index of the c-th child (0-based) of non-leaf, non-root node i.
  function automatic int unsigned child_index(int unsigned eta, int unsigned h,
                                              int unsigned i, int unsigned c);
    int unsigned lv;
    lv = node_level(eta, h, i);
    return level_first(eta, lv + 1) + (i - level_first(eta, lv)) * eta + c;
  endfunction

  // Index of the parent of node i (i >= 1).
  function automatic int unsigned parent_index(int unsigned eta, int unsigned h,
                                               int unsigned i);
    int unsigned lv;
    lv = node_level(eta, h, i);
    return (lv <= 1) ? 0
         : level_first(eta, lv - 1) + (i - level_first(eta, lv)) / eta;
  endfunction

endpackage
