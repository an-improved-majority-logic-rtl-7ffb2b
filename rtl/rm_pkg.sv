// rm_pkg -- shared constants, the fixed wiring table of the RM(2,5) decoder,
// and the functions that derive the wiring for other Reed-Muller codes.
//
// Code RM(r,m): length n = 2^m, minimum distance delta = 2^(m-r), corrects
// delta/2-1 errors; valid for m >= 3 and 1 <= r <= m/2. The decoder needs
// delta-2 r-dimensional subspaces U_l of Z_2^m that meet pairwise only in 0.
// Every U_l cuts the n positions into delta cosets ("r-flats") of 2^r
// positions. A wiring table psi_l lists the positions in flat order: slots
// i*2^r .. i*2^r+2^r-1 hold the positions of flat i. Position p is the
// vector whose binary value is p.
//
// For RM(2,5) the table PSI_RM25 is the paper's psi_0..psi_5. For any other
// code, psi_gen builds one from a construction that is this design's own
// choice (the paper only refers to the literature for it): write a position
// as (y, x) with x its low r bits and y its high k = m-r bits, take
// GF(2^k) and, for l = 0..delta-3, the subspace
//     U_l = { (gf_mul(l, x), x) : x in Z_2^r }.
// Two of them meet only in 0 because the field has no zero divisors. The
// coset of (y, x) in U_l has index y xor gf_mul(l, x), so flat f of U_l holds
// the positions ((f xor gf_mul(l, q)) << r) | q for q = 0..2^r-1.
package rm_pkg;

  // paper's RM(2,5) configuration
  localparam int unsigned R25_NUM_SUB = 6;
  localparam int unsigned R25_N       = 32;

  // psi_l(j) for l = 0..5, j = 0..31, as printed in the paper
  localparam int unsigned PSI_RM25 [R25_NUM_SUB][R25_N] = '{
    '{ 0,  1, 30, 31,  2,  3, 28, 29,  8,  9, 22, 23, 10, 11, 20, 21,
      14, 15, 16, 17, 12, 13, 18, 19,  6,  7, 24, 25,  4,  5, 26, 27},
    '{ 0,  2, 24, 26,  1,  3, 25, 27,  4,  6, 28, 30,  5,  7, 29, 31,
       8, 10, 16, 18,  9, 11, 17, 19, 12, 14, 20, 22, 13, 15, 21, 23},
    '{ 0,  3, 20, 23,  4,  7, 16, 19,  8, 11, 28, 31, 12, 15, 24, 27,
       5,  6, 17, 18,  1,  2, 21, 22, 13, 14, 25, 26,  9, 10, 29, 30},
    '{ 0,  4, 18, 22,  2,  6, 16, 20,  1,  5, 19, 23,  3,  7, 17, 21,
      11, 15, 25, 29,  9, 13, 27, 31, 10, 14, 24, 28,  8, 12, 26, 30},
    '{ 0,  5, 25, 28,  3,  6, 26, 31,  8, 13, 17, 20, 11, 14, 18, 23,
      10, 15, 19, 22,  9, 16, 12, 21,  2,  7, 27, 30,  1,  4, 24, 29},
    '{ 0,  6, 27, 29,  1,  7, 26, 28,  8, 14, 19, 21,  9, 15, 18, 20,
      11, 13, 16, 22,  3,  5, 24, 30, 10, 12, 17, 23,  2,  4, 25, 31}
  };

  // primitive polynomial of GF(2^k), bit i = coefficient of x^i, k = 2..16
  function automatic int unsigned prim_poly(input int unsigned k);
    case (k)
      2:       return 'h7;
      3:       return 'hB;
      4:       return 'h13;
      5:       return 'h25;
      6:       return 'h43;
      7:       return 'h89;
      8:       return 'h11D;
      9:       return 'h211;
      10:      return 'h409;
      11:      return 'h805;
      12:      return 'h1053;
      13:      return 'h201B;
      14:      return 'h4443;
      15:      return 'h8003;
      default: return 'h1100B;
    endcase
  endfunction

  // product of a and b in GF(2^k), shift-and-add with reduction
  function automatic int unsigned gf_mul(input int unsigned a, input int unsigned b,
                                         input int unsigned k);
    int unsigned acc = 0;
    int unsigned x   = a;
    for (int unsigned i = 0; i < k; i++) begin
      if (b[i]) acc ^= x;
      x = x << 1;
      if (x[k]) x ^= prim_poly(k);
    end
    return acc;
  endfunction

  // position in slot j of the wiring for subspace l of the construction above
  function automatic int unsigned psi_gen(input int unsigned r, input int unsigned m,
                                          input int unsigned l, input int unsigned j);
    int unsigned q = j % (1 << r);
    int unsigned f = j >> r;
    return ((f ^ gf_mul(l, q, m - r)) << r) | q;
  endfunction

  // wiring used by the decoder: the paper's table for RM(2,5), psi_gen otherwise
  function automatic int unsigned psi(input int unsigned r, input int unsigned m,
                                      input int unsigned l, input int unsigned j);
    if (r == 2 && m == 5) return PSI_RM25[l][j];
    return psi_gen(r, m, l, j);
  endfunction

endpackage
