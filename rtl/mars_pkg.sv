// mars_pkg: constants, types and compile-time tile geometry shared by the
// MARS (Maximal Atomic irRedundant Sets) I/O path of the Jacobi-1D tile
// accelerator.
//
// Geometry. The iteration space (t, i) of Jacobi-1D is tiled with diamond
// tiles. In skewed coordinates u = t + i and v = t - i a tile of size T is a
// T x T square holding the points whose local coordinates (ul, vl) in
// [0, T-1]^2 have equal parity (T*T/2 points, 18 for T = 6). A point depends
// on (ul-2, vl), (ul-1, vl-1) and (ul, vl-2), i.e. on (t-1, i-1), (t-1, i),
// (t-1, i+1). The tile scratchpad stores local points with ul, vl in
// [-2, T-1] at address (ul+2)*(T+2) + (vl+2).
//
// Output MARS of one tile (blocks that are contiguous in off-chip memory):
//   O1 : vl in {T-2, T-1}, ul = 0 .. T-3        (T-2 words)
//   O2 : (T-1, T-1), the tile top point          (1 word)
//   O3 : (T-2, T-2)                              (1 word)
//   O4 : ul in {T-2, T-1}, vl = 0 .. T-3        (T-2 words)
// They are laid out in memory in the order O1, O3, O2, O4 (the solution of
// the layout optimisation), so the uncompressed starts of O3, O2 and O4 are
// the three markers T-2, T-1, T (62, 63, 64 for T = 64).
//
// Input of one tile: three coalesced bursts, one per producer tile:
//   SW producer (u - T)     : its O3, O2, O4  -> local I2, I1, I3
//   S  producer (u-T, v-T)  : its O2          -> local I4
//   SE producer (v - T)     : its O1, O3, O2  -> local I5, I7, I6
// Within a MARS the points are ordered by increasing ul (O1) or vl (O4);
// that order is a choice of this design.
package mars_pkg;

  localparam int NB_MARKERS = 3;            // starts of O3, O2, O4
  localparam int NB_POS     = NB_MARKERS + 1; // plus end of the tile stream
  localparam int NB_DEPS    = 3;
  localparam int MAX_SEGS   = 3;            // MARS per read burst

  typedef enum logic [1:0] {DEP_SW = 2'd0, DEP_S = 2'd1, DEP_SE = 2'd2} dep_e;

  // Width of the length field of a compressed word: floor(1 + log2(N)).
  function automatic int hdr_w(input int n);
    return $clog2(n + 1);
  endfunction

  // Longest compressed code: length field, sign bit and N-2 low bits.
  function automatic int code_max(input int n);
    return n + hdr_w(n) - 1;
  endfunction

  function automatic int max2(input int a, input int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int buf_depth(input int t);
    return (t + 2) * (t + 2);
  endfunction

  function automatic int buf_addr(input int t, input int ul, input int vl);
    return (ul + 2) * (t + 2) + (vl + 2);
  endfunction

  function automatic int out_len(input int t);
    return 2 * t - 2;
  endfunction

  function automatic int in_len(input int t);
    return 2 * t + 1;
  endfunction

  // Position (in words of the uncompressed stream) of marker m:
  // 0 = start of O3, 1 = start of O2, 2 = start of O4, 3 = end of tile.
  function automatic int plain_marker(input int t, input int m);
    return (m == NB_MARKERS) ? out_len(t) : t - 2 + m;
  endfunction

  // Scratchpad address of the k-th word of the output stream O1,O3,O2,O4.
  function automatic int out_addr(input int t, input int k);
    int j;
    if (k < t - 2) return buf_addr(t, k, t - 2 + ((k + t) % 2));
    if (k == t - 2) return buf_addr(t, t - 2, t - 2);
    if (k == t - 1) return buf_addr(t, t - 1, t - 1);
    j = k - t;
    return buf_addr(t, t - 2 + ((j + t) % 2), j);
  endfunction

  // Scratchpad address of the k-th word of the input stream (SW, S, SE).
  function automatic int in_addr(input int t, input int k);
    int j;
    if (k == 0) return buf_addr(t, -2, t - 2);               // SW O3 -> I2
    if (k == 1) return buf_addr(t, -1, t - 1);               // SW O2 -> I1
    if (k < t) begin                                         // SW O4 -> I3
      j = k - 2;
      return buf_addr(t, -2 + ((j + t) % 2), j);
    end
    if (k == t) return buf_addr(t, -1, -1);                  // S O2 -> I4
    j = k - t - 1;
    if (j < t - 2) return buf_addr(t, j, -2 + ((j + t) % 2)); // SE O1 -> I5
    if (j == t - 2) return buf_addr(t, t - 2, -2);           // SE O3 -> I7
    return buf_addr(t, t - 1, -1);                           // SE O2 -> I6
  endfunction

  // True when output word k is the first word of a MARS.
  function automatic bit out_mars_first(input int t, input int k);
    return (k == 0) || (k == t - 2) || (k == t - 1) || (k == t);
  endfunction

  // Number of MARS and their lengths in the read burst from producer d.
  function automatic int dep_nseg(input int d);
    return (d == int'(DEP_S)) ? 1 : 3;
  endfunction

  function automatic int dep_seg_len(input int t, input int d, input int s);
    case (d)
      int'(DEP_SW): return (s == 2) ? t - 2 : 1;
      int'(DEP_S):  return 1;
      default:      return (s == 0) ? t - 2 : 1;
    endcase
  endfunction

  // Word offset of the first and the end (exclusive) marker of burst d.
  function automatic int dep_first_marker(input int d);
    case (d)
      int'(DEP_SW): return 0;
      int'(DEP_S):  return 1;
      default:      return -1;  // tile start
    endcase
  endfunction

  function automatic int dep_end_marker(input int d);
    return (d == int'(DEP_SW)) ? NB_MARKERS : 2;
  endfunction

endpackage
