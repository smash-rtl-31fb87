// tb_smash_pkg: software side of SMASH for the testbenches.
//
// bitmap_enc converts a sparse matrix, given as its set of non-zero
// positions, into the hierarchical bitmap encoding the BMU reads: for each
// level a packed bit stream that holds only the blocks whose parent bit is
// set, in depth-first order. It also lists the linear index of every
// non-zero block in the order a correct BMU must report them, and keeps a
// value per non-zero element so that testbenches can run SpMV on the result.
//   Bitmap-0 bit k is set if any element in [k*comp0, (k+1)*comp0) is
//   non-zero; Bitmap-i bit k is set if any Bitmap-(i-1) bit in
//   [k*comp_i, (k+1)*comp_i) is set. The top level covers the whole matrix:
//   ceil(rows*cols / prod comp) bits.
package tb_smash_pkg;

  class bitmap_enc;
    longint unsigned rows, cols, total;
    int unsigned     nlev;
    int unsigned     comp [3];
    int              val  [longint unsigned];    // element index -> value
    bit              setb [3][longint unsigned];
    bit              stream [3][$];
    longint unsigned exp_idx [$];

    function new(longint unsigned r, longint unsigned c, int unsigned n,
                 int unsigned c0, int unsigned c1, int unsigned c2);
      rows = r; cols = c; total = r * c; nlev = n;
      comp[0] = c0; comp[1] = c1; comp[2] = c2;
    endfunction

    function void add(longint unsigned e, int v);
      if (e < total && v != 0) val[e] = v;
    endfunction

    function longint unsigned wprod(int l);
      longint unsigned w = 1;
      for (int j = 0; j <= l; j++) w *= comp[j];
      return w;
    endfunction

    function void build();
      longint unsigned k, ntop, w;
      int top = int'(nlev) - 1;
      for (int l = 0; l < 3; l++) begin setb[l].delete(); stream[l].delete(); end
      exp_idx.delete();
      foreach (val[e]) setb[0][e / comp[0]] = 1;
      for (int l = 1; l < int'(nlev); l++)
        foreach (setb[l-1][q]) setb[l][q / comp[l]] = 1;
      w    = wprod(top);
      ntop = (total + w - 1) / w;
      for (k = 0; k < ntop; k++) stream[top].push_back(setb[top].exists(k));
      for (int l = top - 1; l >= 0; l--)
        foreach (setb[l+1][q])
          for (longint unsigned b = 0; b < comp[l+1]; b++)
            stream[l].push_back(setb[l].exists(q * comp[l+1] + b));
      foreach (setb[0][q]) exp_idx.push_back(q * comp[0]);
    endfunction
  endclass

endpackage
