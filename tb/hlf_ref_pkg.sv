// hlf_ref_pkg: reference model for the testbenches of the FS2D HLF solver,
// written independently of the RTL. Vectors are up to 64 bits; vertex v
// (0-based, v = row*N + col) is bit v. The grid matrix A has A_ij = 1 for
// nearest neighbours and A_ii = b_i.
package hlf_ref_pkg;

  typedef logic [63:0] vec_t;

  // Row i of A for an n_side x n_side grid with diagonal b.
  function automatic vec_t adj_row(int n_side, vec_t b, int i);
    vec_t row;
    int r, c;
    row = '0;
    r = i / n_side;
    c = i % n_side;
    if (c > 0)          row[i - 1]      = 1'b1;
    if (c < n_side - 1) row[i + 1]      = 1'b1;
    if (r > 0)          row[i - n_side] = 1'b1;
    if (r < n_side - 1) row[i + n_side] = 1'b1;
    row[i] = b[i];
    return row;
  endfunction

  // y = A x over GF(2).
  function automatic vec_t matvec(int n_side, vec_t b, vec_t x);
    vec_t y;
    y = '0;
    for (int i = 0; i < n_side * n_side; i++)
      y[i] = ^(adj_row(n_side, b, i) & x);
    return y;
  endfunction

  // q(x) = x^T A x mod 4.
  function automatic int qform(int n_side, vec_t b, vec_t x);
    int s;
    s = 0;
    for (int i = 0; i < n_side * n_side; i++)
      if (x[i]) s += $countones(adj_row(n_side, b, i) & x);
    return s % 4;
  endfunction

  // GF(2) rank of a list of vectors (linear basis keyed by leading bit).
  function automatic int rank_of(vec_t vs[$]);
    vec_t basis[64];
    int r;
    vec_t v;
    for (int k = 0; k < 64; k++) basis[k] = '0;
    r = 0;
    foreach (vs[j]) begin
      v = vs[j];
      for (int k = 63; k >= 0; k--) begin
        if (v[k]) begin
          if (basis[k] == '0) begin
            basis[k] = v;
            r++;
            break;
          end
          v = v ^ basis[k];
        end
      end
    end
    return r;
  endfunction

  function automatic int grid_rank(int n_side, vec_t b);
    vec_t rows[$];
    for (int i = 0; i < n_side * n_side; i++) rows.push_back(adj_row(n_side, b, i));
    return rank_of(rows);
  endfunction

  // Rank of the columns of A selected by mask (A is symmetric: column = row).
  function automatic int masked_rank(int n_side, vec_t b, vec_t mask);
    vec_t cols[$];
    for (int i = 0; i < n_side * n_side; i++)
      if (mask[i]) cols.push_back(adj_row(n_side, b, i));
    return rank_of(cols);
  endfunction

  // True when z solves 2 z.x = q(x) mod 4 for all x in Ker(A). For n <= 16
  // every x in {0,1}^n is tried. For larger n the kernel is enumerated from
  // a basis found by brute-force-free elimination: x is in Ker(A) iff A x = 0;
  // the kernel basis comes from reducing the augmented rows [A_i | e_i].
  function automatic bit is_solution(int n_side, vec_t b, vec_t z);
    int n;
    n = n_side * n_side;
    if (n <= 16) begin
      for (longint unsigned x = 0; x < (64'd1 << n); x++) begin
        if (matvec(n_side, b, vec_t'(x)) == '0)
          if (qform(n_side, b, vec_t'(x)) != (2 * ($countones(z & vec_t'(x)) % 2)))
            return 1'b0;
      end
      return 1'b1;
    end else begin
      // Kernel of the symmetric A = left kernel: combinations of rows that
      // vanish. Track each row's combination in a second word.
      vec_t rv[64], cv[64];
      int used[64];
      for (int i = 0; i < n; i++) begin
        rv[i] = adj_row(n_side, b, i);
        cv[i] = '0;
        cv[i][i] = 1'b1;
        used[i] = 0;
      end
      for (int k = 0; k < n; k++) begin
        int p;
        p = -1;
        for (int i = 0; i < n; i++)
          if (p < 0 && used[i] == 0 && rv[i][k]) p = i;
        if (p >= 0) begin
          used[p] = 1;
          for (int i = 0; i < n; i++)
            if (i != p && rv[i][k]) begin
              rv[i] = rv[i] ^ rv[p];
              cv[i] = cv[i] ^ cv[p];
            end
        end
      end
      // q restricted to Ker(A) is linear mod 4, so the basis decides.
      for (int i = 0; i < n; i++)
        if (rv[i] == '0) begin
          if (matvec(n_side, b, cv[i]) != '0) return 1'b0;
          if (qform(n_side, b, cv[i]) != (2 * ($countones(z & cv[i]) % 2)))
            return 1'b0;
        end
      return 1'b1;
    end
  endfunction

  // Counter value k spread over the set bits of mask, lowest bit first.
  function automatic vec_t scatter(longint unsigned k, vec_t mask);
    vec_t r;
    int j;
    r = '0;
    j = 0;
    for (int v = 0; v < 64; v++)
      if (mask[v]) begin
        r[v] = k[j];
        j++;
      end
    return r;
  endfunction

  // Printed bit string s1 s2 ... sn (s1 = vertex 1) to a vector.
  function automatic vec_t from_str(string s);
    vec_t v;
    v = '0;
    for (int i = 0; i < s.len(); i++) v[i] = (s[i] == "1");
    return v;
  endfunction

endpackage
