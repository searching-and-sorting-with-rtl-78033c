// xpa_pkg -- shared constants, types and the layout construction of the
// 1D-Crosspoint Array.
//
// The array is a straight line of PEs. Every PE belongs to one of n classes;
// class i holds input element A[i], and the other PEs of class i are its
// replicates. Two PEs that sit next to each other are joined by a crosspoint,
// and the layout is chosen so that every pair of classes meets at least once.
//
// pe_class(n, pos) computes the class of the PE at position pos by the
// cyclic-permutation construction: with m = n for even n and m = n-1 for odd
// n, the cycles of p^j (p(i) = i+1 mod m), j = 1..m/2, are written starting
// with their smallest element and grouped into sets Q_i by that first element
// i = 0..m/2-1. The sets are laid out in order of i; inside a set the cycles
// follow in increasing j, which puts the single two-element cycle (from
// p^(m/2)) last. For odd n one empty slot is left between consecutive sets
// and filled with class n-1, and the line ends with classes n-1 and 0. An odd
// n gives n(n-1)/2+1 PEs in which every pair of classes is adjacent exactly
// once; an even n gives n^2/2 PEs with n/2-1 repeated adjacencies.
//
// The order of the cycles inside one Q_i is free in the construction ("choose
// any cycle"); taking them in increasing j is this design's choice and
// reproduces the printed n = 7 and n = 12 layouts.
//
// All functions are constant functions, evaluated during elaboration.
package xpa_pkg;

  // Phases of one sort/search operation, in the order they occur.
  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,  // waiting for start; results of the last run held
    PH_LOAD = 2'd1,  // elements loaded into every PE, T cleared
    PH_CMP  = 2'd2,  // neighbours compare through the crosspoints, T written
    PH_DONE = 2'd3   // T complete, rank/min/max/search outputs valid
  } phase_e;

  function automatic int gcd(int a, int b);
    int x, y, t;
    x = a;
    y = b;
    while (y != 0) begin
      t = x % y;
      x = y;
      y = t;
    end
    return x;
  endfunction

  // Number of PEs (and one more than the number of crosspoints).
  function automatic int num_pes(int n);
    return (n % 2 == 1) ? n * (n - 1) / 2 + 1 : n * n / 2;
  endfunction

  // Class of the PE at position pos (0 = leftmost), or -1 past the end.
  function automatic int pe_class(int n, int pos);
    int m, k, e, len;
    bit odd;
    odd = (n % 2 == 1);
    m   = odd ? n - 1 : n;
    k   = 0;
    for (int i = 0; i < m / 2; i++) begin
      // odd n: the slot skipped between Q_(i-1) and Q_i holds class n-1
      if (odd && i > 0) begin
        if (k == pos) return n - 1;
        k++;
      end
      for (int j = 1; j <= m / 2; j++) begin
        if (i < gcd(m, j)) begin
          len = m / gcd(m, j);
          e   = i;
          for (int t = 0; t < len; t++) begin
            if (k == pos) return e;
            k++;
            e = (e + j) % m;
          end
        end
      end
    end
    if (odd) begin
      if (k == pos) return n - 1;
      k++;
      if (k == pos) return 0;
    end
    return -1;
  endfunction

  // Replicate number of the PE at position pos: how many PEs of the same
  // class stand to its left (C_{i,j} has replicate number j).
  function automatic int pe_replicate(int n, int pos);
    int c, r;
    c = pe_class(n, pos);
    r = 0;
    for (int q = 0; q < pos; q++)
      if (pe_class(n, q) == c) r++;
    return r;
  endfunction

  // Bits needed for an index 0..n-1 (at least one).
  function automatic int idx_bits(int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
