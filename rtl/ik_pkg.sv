// ik_pkg -- shared constants and elaboration-time functions of the
// iterative Karatsuba polynomial multiplier.
//
// The operands A and B are cut into SEGMENTS segments of n bits
// (SEGMENTS = 2^L). Applying Karatsuba's two-way split L times gives 3^L
// partial products, each of the form (XOR of some segments of A) times
// (XOR of the same segments of B). A partial product is named here by a
// "code": L base-3 digits, digit l (least significant first) telling what
// the l-th split, counted from the outermost, takes:
//   0 = the low half, 1 = the high half, 2 = the XOR of both halves.
// From a code follow
//   * the segment subset that the selection block XORs together, and
//   * the set of segment offsets at which the (2n-1)-bit product has to be
//     XORed into the result: a low half product lands at {0, h}, a high one
//     at {h, 2h} and a middle one at {h}, h being half the segment count at
//     that split; nested splits add these offsets, and an offset reached an
//     even number of times cancels (GF(2) addition).
// The clock-by-clock order of the partial products follows the example of
// the source paper for four segments: single segments first
// (a0b0, a1b1, a2b2, a3b3), then pairs in the order 01, 02, 13, 23, then the
// sum of all four. In general: fewer segments first, and among subsets of
// equal size the one whose ascending list of segment indices is
// lexicographically smaller first. The ordering rule for more than four
// segments is this design's own generalisation.
//
// All functions run only at elaboration, to fill constant tables.
package ik_pkg;

  // Largest supported configuration: 8 segments, 27 clocks (the ordering
  // function below is evaluated at elaboration and grows with the cube of
  // the number of partial products).
  localparam int unsigned MAX_SEGS  = 8;
  localparam int unsigned MAX_STEPS = 27;

  typedef logic [MAX_SEGS-1:0]   seg_mask_t;  // bit i: segment i takes part
  typedef logic [2*MAX_SEGS-1:0] off_mask_t;  // bit k: XOR product in at segment k

  typedef seg_mask_t [MAX_STEPS-1:0] seg_table_t;
  typedef off_mask_t [MAX_STEPS-1:0] off_table_t;

  // Number of partial products (= clocks per multiplication): 3^log2(segs).
  function automatic int unsigned num_steps(int unsigned segs);
    int unsigned r;
    r = 1;
    for (int unsigned s = segs; s > 1; s = s / 2) r = r * 3;
    return r;
  endfunction

  // Segment subset that the partial product with this code multiplies.
  function automatic seg_mask_t code_subset(int unsigned segs, int unsigned code);
    int unsigned levels;
    int unsigned c;
    int unsigned d;
    logic        ok;
    seg_mask_t   m;
    levels = $clog2(segs);
    m = '0;
    for (int unsigned i = 0; i < segs; i++) begin
      ok = 1'b1;
      c  = code;
      for (int unsigned l = 0; l < levels; l++) begin
        d = c % 3;
        c = c / 3;
        // the outermost split decides the top bit of the segment index
        if (d == 0 && ((i >> (levels - 1 - l)) & 1) != 0) ok = 1'b0;
        if (d == 1 && ((i >> (levels - 1 - l)) & 1) != 1) ok = 1'b0;
      end
      m[i] = ok;
    end
    return m;
  endfunction

  // Segment offsets at which the partial product with this code is XORed
  // into the result (XOR-sum of the offset sets of every split).
  function automatic off_mask_t code_offsets(int unsigned segs, int unsigned code);
    int unsigned levels;
    int unsigned c;
    int unsigned d;
    int unsigned h;
    off_mask_t   acc;
    levels = $clog2(segs);
    acc = off_mask_t'(1);
    c = code;
    for (int unsigned l = 0; l < levels; l++) begin
      d = c % 3;
      c = c / 3;
      h = segs >> (l + 1);
      case (d)
        0:       acc = acc ^ (acc << h);
        1:       acc = (acc << h) ^ (acc << (2 * h));
        default: acc = acc << h;
      endcase
    end
    return acc;
  endfunction

  // True if subset m1 is multiplied before subset m2.
  function automatic logic subset_before(seg_mask_t m1, seg_mask_t m2);
    if ($countones(m1) != $countones(m2)) return $countones(m1) < $countones(m2);
    for (int unsigned i = 0; i < MAX_SEGS; i++)
      if (m1[i] != m2[i]) return m1[i];
    return 1'b0;
  endfunction

  // Code of the partial product computed in clock `step` (0-based).
  function automatic int unsigned step_code(int unsigned segs, int unsigned step);
    int unsigned n;
    int unsigned rank;
    int unsigned found;
    n = num_steps(segs);
    found = 0;
    for (int unsigned c = 0; c < n; c++) begin
      rank = 0;
      for (int unsigned o = 0; o < n; o++)
        if (o != c && subset_before(code_subset(segs, o), code_subset(segs, c)))
          rank++;
      if (rank == step) found = c;
    end
    return found;
  endfunction

  // Table: segment subset selected in each clock.
  function automatic seg_table_t subset_table(int unsigned segs);
    seg_table_t t;
    t = '0;
    for (int unsigned s = 0; s < num_steps(segs); s++)
      t[s] = code_subset(segs, step_code(segs, s));
    return t;
  endfunction

  // Table: result segment offsets of the partial product of each clock.
  function automatic off_table_t offset_table(int unsigned segs);
    off_table_t t;
    t = '0;
    for (int unsigned s = 0; s < num_steps(segs); s++)
      t[s] = code_offsets(segs, step_code(segs, s));
    return t;
  endfunction

endpackage
