// rm_pkg: shared constants and elaboration-time helper functions of the
// soft-input IUPA (iterative unique projection-aggregation) decoder for
// third-order Reed-Muller codes RM(m,3).
//
// Coordinates of a length-2^m vector are the elements z of F_2^m, written as
// integers. Projecting onto the one-dimensional subspace B_k = {0, k} pairs z
// with z^k. The coset {z, z^k} is numbered by taking the member whose bit
// hibit(k) is 0 and deleting that bit; the map is linear with kernel B_k, so
// the projected vector is again a Reed-Muller codeword in the usual coordinate
// order. This indexing is this design's choice (the paper takes it from an
// earlier work); with it, the redundancy matrix R of the paper keeps its
// stated shape: columns 2^(m-2)..2^(m-1)-1 only ever give unique first-order
// codewords and every left-half entry occurs three times.
//
// Projection allocation (which rows and columns each second-order decoder
// serves) is computed here at elaboration time rather than taken from an ILP
// solver: group g serves rows j = g*R .. g*R+R-1 (R = 2^(m-1)/G, row 0 being
// the dummy all-zero row of group 0) and the left-half columns
// 2^floor(log2(jmin)) .. 2^(m-2)-1, where jmin is its smallest non-zero row.
// This is the unique-selection rule b_f = 2^floor(log2 b) applied per group.
// T_FOD, the first-order decoder latency, is used by the modules that import
// the package, so a lint run of the package alone reports it unused.
package rm_pkg;

  // Index of the highest set bit (0 for x == 0).
  function automatic int unsigned hibit(input int unsigned x);
    int unsigned h;
    h = 0;
    for (int i = 0; i < 32; i++) if (x[i]) h = i;
    return h;
  endfunction

  // Insert a zero bit at position h of t.
  function automatic int unsigned ins0(input int unsigned t, input int unsigned h);
    int unsigned lo_mask;
    lo_mask = (32'd1 << h) - 1;
    return ((t >> h) << (h + 1)) | (t & lo_mask);
  endfunction

  // Delete bit h of z.
  function automatic int unsigned del_bit(input int unsigned z, input int unsigned h);
    int unsigned lo_mask;
    lo_mask = (32'd1 << h) - 1;
    return ((z >> (h + 1)) << h) | (z & lo_mask);
  endfunction

  // Index of the coset of B_k = {0,k} that holds z (k != 0).
  function automatic int unsigned coset_idx(input int unsigned z, input int unsigned k);
    int unsigned h;
    int unsigned rep;
    h   = hibit(k);
    rep = z[h] ? (z ^ k) : z;
    return del_bit(rep, h);
  endfunction

  // Rows (second-order vectors) per group, dummy row included.
  function automatic int unsigned rows_per_group(input int unsigned m, input int unsigned g);
    return (32'd1 << (m - 1)) / g;
  endfunction

  // First left-half column served by group gi.
  function automatic int unsigned col_lo(input int unsigned m, input int unsigned g,
                                         input int unsigned gi);
    int unsigned jmin;
    jmin = (gi == 0) ? 1 : gi * rows_per_group(m, g);
    return 32'd1 << hibit(jmin);
  endfunction

  // Number of left-half columns served by group gi.
  function automatic int unsigned n_left_cols(input int unsigned m, input int unsigned g,
                                              input int unsigned gi);
    int unsigned half;
    half = 32'd1 << (m - 2);
    return (col_lo(m, g, gi) >= half) ? 0 : half - col_lo(m, g, gi);
  endfunction

  // PUs for the left-half columns of group gi (the ILP part).
  function automatic int unsigned n_left_pus(input int unsigned m, input int unsigned g,
                                             input int unsigned lambda, input int unsigned gi);
    return (n_left_cols(m, g, gi) + lambda - 1) / lambda;
  endfunction

  // PUs for the right-half columns of every group (2^(m-2)/lambda).
  function automatic int unsigned n_right_pus(input int unsigned m, input int unsigned lambda);
    return (32'd1 << (m - 2)) / lambda;
  endfunction

  // Total PUs of one iteration.
  function automatic int unsigned total_pus(input int unsigned m, input int unsigned g,
                                            input int unsigned lambda);
    int unsigned s;
    s = 0;
    for (int unsigned gi = 0; gi < g; gi++) s += n_left_pus(m, g, lambda, gi) + n_right_pus(m, lambda);
    return s;
  endfunction

  // Latency of the first-order decoder pipeline in cycles.
  localparam int unsigned T_FOD = 4;

endpackage
