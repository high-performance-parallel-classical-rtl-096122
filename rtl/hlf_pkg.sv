// hlf_pkg: constants and grid-geometry functions shared by the FS2D HLF
// (full-sampling 2D hidden linear function) solver.
//
// The problem instance is an N x N all-connected square grid. Vertex v
// (0-based, v = row*N + col) is bit v of every n-bit vector (n = N*N), so
// the paper's vertex i is bit i-1 here and the printed string z1 z2 ... zn
// has z1 in bit 0. A is the grid adjacency matrix with the diagonal string b
// on its diagonal.
//
// The grid edges are split into four disjoint layers, the colours of the
// paper's grid drawing: horizontal edges between columns (c, c+1) with c even
// (pink, layer 0) or c odd (green, layer 1), and vertical edges between rows
// (r, r+1) with r even (orange, layer 2) or r odd (blue, layer 3). Inside a
// layer no vertex has more than one edge, so all the layer's operation units
// act in parallel.
package hlf_pkg;

  // Grid side of the main configuration: 25 channels, a 5 x 5 grid.
  localparam int unsigned N_DEFAULT = 5;

  // Edge layers, in the order the parallel circuit applies them.
  typedef enum logic [1:0] {
    LAYER_PINK   = 2'd0,  // horizontal, even column pairs
    LAYER_GREEN  = 2'd1,  // horizontal, odd column pairs
    LAYER_ORANGE = 2'd2,  // vertical, even row pairs
    LAYER_BLUE   = 2'd3   // vertical, odd row pairs
  } layer_e;

  // Partner of vertex v in edge layer `layer` of an n_side x n_side grid,
  // or -1 when v has no edge in that layer.
  function automatic int partner(int n_side, int layer, int v);
    int row, col, pos, par;
    row = v / n_side;
    col = v % n_side;
    par = layer % 2;
    pos = (layer < 2) ? col : row;
    if ((pos % 2) == par && pos + 1 < n_side)
      return (layer < 2) ? v + 1 : v + n_side;
    if (pos >= 1 && ((pos - 1) % 2) == par)
      return (layer < 2) ? v - 1 : v - n_side;
    return -1;
  endfunction

  // True when edge layer `layer` holds at least one edge. For a 2 x 2 grid
  // only the pink and orange layers do.
  function automatic bit layer_used(int n_side, int layer);
    return n_side >= (layer % 2) + 2;
  endfunction

  // Number of edge layers that hold edges.
  function automatic int edge_layers(int n_side);
    int cnt;
    cnt = 0;
    for (int l = 0; l < 4; l++)
      if (layer_used(n_side, l)) cnt++;
    return cnt;
  endfunction

  // True when vertices u and v are nearest neighbours in the grid.
  function automatic bit grid_adjacent(int n_side, int u, int v);
    int ru, cu, rv, cv, dr, dc;
    ru = u / n_side; cu = u % n_side;
    rv = v / n_side; cv = v % n_side;
    dr = (ru > rv) ? ru - rv : rv - ru;
    dc = (cu > cv) ? cu - cv : cv - cu;
    return (dr + dc) == 1;
  endfunction

endpackage
