// tb_graph_pkg: a synthetic decoding graph for the testbenches.
//
// Node k of the N_DET nodes sits at round t = k / DET_PER_RD and, inside a
// round, on a ROWS x COLS grid (7 columns; 12 rows for d=13). Each node has
// up to three forward neighbours: the next column (weight 10), the next row
// (weight 10) and the same place one round later (weight 12). The graph has
// no triangles. Path-table groups come from the Manhattan distance dist in
// (t,row,col): group = min(dist-1, 3). All values are computed, nothing is
// read from a file.
package tb_graph_pkg;
  import promatch_pkg::*;

  localparam int COLS = 7;
  localparam int ROWS = DET_PER_RD / COLS;

  function automatic int node(int t, int r, int c);
    return t * DET_PER_RD + r * COLS + c;
  endfunction
  function automatic int nt(int k); return k / DET_PER_RD; endfunction
  function automatic int nr(int k); return (k % DET_PER_RD) / COLS; endfunction
  function automatic int nc(int k); return k % COLS; endfunction

  function automatic int iabs(int x); return (x < 0) ? -x : x; endfunction

  function automatic int mdist(int a, int b);
    return iabs(nt(a) - nt(b)) + iabs(nr(a) - nr(b)) + iabs(nc(a) - nc(b));
  endfunction

  function automatic bit adjacent(int a, int b);
    return mdist(a, b) == 1;
  endfunction

  function automatic int edge_w(int a, int b);
    return (nt(a) != nt(b)) ? 12 : 10;
  endfunction

  function automatic int path_cat(int a, int b);
    automatic int d;
    d = mdist(a, b);
    if (d == 0) return 0;
    return (d - 1 > 3) ? 3 : d - 1;
  endfunction

  // forward-neighbour slot s of node k
  function automatic nbr_entry_t et_entry(int k, int s);
    nbr_entry_t e;
    e = '0;
    case (s)
      0: if (nc(k) < COLS - 1)   e = '{valid: 1'b1, nbr: det_idx_t'(k + 1),          w: weight_t'(10)};
      1: if (nr(k) < ROWS - 1)   e = '{valid: 1'b1, nbr: det_idx_t'(k + COLS),       w: weight_t'(10)};
      2: if (nt(k) < int'(D))    e = '{valid: 1'b1, nbr: det_idx_t'(k + DET_PER_RD), w: weight_t'(12)};
      default: e = '0;
    endcase
    return e;
  endfunction
endpackage
