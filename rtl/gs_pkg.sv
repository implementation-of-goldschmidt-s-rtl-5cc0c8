// gs_pkg -- shared constants, types and the reciprocal-table formula of the
// Goldschmidt divider.
//
// All datapath values (N, D, K_i, q_i, r_i) use one unsigned fixed-point
// format of W bits with FRAC fraction bits, i.e. 2 integer bits and 62
// fraction bits by default (value = word * 2^-FRAC). Two integer bits are
// enough because every value of the iteration stays below 4: N and D are
// normalised significands in [1,2), K_1 is below 1, and q_i approaches N/D < 2
// while r_i and K_i stay close to 1.
//
// The default sizes are this design's own choice: the published description of the
// architecture keeps the multiplier width n and the table size p symbolic.
// The 4-cycle multiplier latency and the number of feedback passes (two, so
// that q_4 is the result) follow the published method.
package gs_pkg;

  // Significand of the operands: 1 hidden bit + SIG_FRAC fraction bits
  // (IEEE double precision by default).
  parameter int unsigned SIG_FRAC  = 52;
  // Datapath / multiplier width n and its fraction bits.
  parameter int unsigned W         = 64;
  parameter int unsigned FRAC      = 62;
  // Reciprocal table: P bits in, P+2 bits out.
  parameter int unsigned P         = 8;
  // Cycles per multiplication.
  parameter int unsigned MUL_LAT   = 4;
  // Number of times a fed-back r_{2,3..i} passes the logic block.
  // Two passes give K_2, K_3, K_4 and the result q_4.
  parameter int unsigned FB_PASSES = 2;

  typedef logic [W-1:0] fix_t;

  // Entry i of the optimal (midpoint) reciprocal table with p bits in and
  // p+2 bits out. Index i selects the interval D in [1+i*2^-p, 1+(i+1)*2^-p);
  // the entry is the reciprocal of its midpoint, rounded to nearest, as a
  // fraction with p+2 bits:
  //   k(i) = round( 2^(2p+3) / (2^(p+1) + 2i + 1) )
  // For every i the result is below 2^(p+2), so it fits the p+2 bit output.
  function automatic longint unsigned recip_entry(int unsigned p, longint unsigned i);
    longint unsigned num, den;
    num = 64'd1 << (2*p + 3);
    den = (64'd1 << (p + 1)) + 2*i + 1;
    return (2*num + den) / (2*den);
  endfunction

endpackage
