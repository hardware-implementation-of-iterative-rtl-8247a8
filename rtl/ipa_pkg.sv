// ipa_pkg: constants and index helpers shared by the IPA (iterative
// projection-aggregation) decoder for Reed-Muller codes RM(m,3).
//
// A projection with index i (1 <= i < 2^m) pairs coordinate z with z^i. The
// pair is represented by the member whose bit h = msb(i) is 0. Removing bit h
// from that member gives the coordinate of the pair in the projected
// half-length vector. The projection (ROU) and the aggregation (RRUM) units
// use these helpers, and they give the same numbering as the recursive
// Proj/FindIndex procedures. The order r = 3 and the iteration length
// 3(r-1)+4 follow the decoder description. The helper names are this
// design's own.
package ipa_pkg;

  // Order of the code. The datapath has r-1 = 2 projection levels and r-1 = 2
  // aggregation levels.
  localparam int unsigned R = 3;
  // Clock cycles per decoding iteration: r-1 projection registers,
  // 2(r-1) aggregation registers, 3 FOD registers, 1 termination register.
  localparam int unsigned CYC_PER_ITER = 3 * (R - 1) + 4;

  // Position of the highest set bit of i (i > 0).
  function automatic int unsigned msb_pos(int unsigned i);
    int unsigned h;
    h = 0;
    for (int unsigned b = 0; b < 32; b++)
      if (i[b]) h = b;
    return h;
  endfunction

  // Insert a 0 bit at position h of k.
  function automatic int unsigned ins0(int unsigned k, int unsigned h);
    return ((k >> h) << (h + 1)) | (k & ((32'd1 << h) - 32'd1));
  endfunction

  // Delete bit h of z.
  function automatic int unsigned del_bit(int unsigned z, int unsigned h);
    return ((z >> (h + 1)) << h) | (z & ((32'd1 << h) - 32'd1));
  endfunction

  // FindIndex(z, i): coordinate of the projected vector y_i that was formed
  // from y(z).
  function automatic int unsigned find_index(int unsigned z, int unsigned i);
    int unsigned h;
    int unsigned rep;
    h   = msb_pos(i);
    rep = z[h] ? (z ^ i) : z;
    return del_bit(rep, h);
  endfunction

endpackage
