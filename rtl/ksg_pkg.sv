// ksg_pkg: types and constants shared by the NLFSR keystream generator.
//
// The generator combines sixteen maximum-period Fibonacci NLFSRs A_1..A_16
// of lengths 6..17, 19, 21, 22 and 23 (223 state bits in all). Each NLFSR
// updates its top cell with x_0 xor RFF(x_1..x_{N-1}), where the random
// feedback function RFF is one member of a published set S_N. Every member
// has one of three shapes, each a sum of linear terms and products of two:
//
//   F1:  a, b, (c,d)          x_a + x_b + x_c x_d
//   F2:  a, (b,c), (d,e)      x_a + x_b x_c + x_d x_e
//   F3:  a, b, c, d, (e,h)    x_a + x_b + x_c + x_d + x_e x_h
//
// and is used in one of four forms: basic, reverse (index j read as N-j),
// complement (g applied to the inverted cells, which yields the complemented
// sequence) and reverse complement.
//
// rff_t stores such a function as written in the table: idx[0] is the first
// index listed, idx[1] the second, and so on. The defaults below are the
// first entry of each length's set, in basic form; any other member of the
// set can be passed to the generator as a parameter. The choice of one RFF
// per NLFSR is the personalisation step that makes each chip's cipher
// unique; here it is fixed when the design is elaborated.
//
// State packing used across the design: A_1 occupies the lowest N_1 bits of
// a 223-bit vector, A_2 the next N_2 bits, and so on; inside each field bit j
// is NLFSR cell j (cell 0 is the output).
package ksg_pkg;

  localparam int unsigned NUM_NLFSR  = 16;
  localparam int unsigned STATE_BITS = 223;

  typedef enum logic [1:0] {
    RFF_F1 = 2'd0,   // a, b, (c,d)
    RFF_F2 = 2'd1,   // a, (b,c), (d,e)
    RFF_F3 = 2'd2    // a, b, c, d, (e,h)
  } rff_kind_e;

  typedef enum logic [1:0] {
    FORM_BASIC      = 2'd0,
    FORM_REVERSE    = 2'd1,
    FORM_COMPLEMENT = 2'd2,
    FORM_REV_COMPL  = 2'd3
  } rff_form_e;

  typedef struct packed {
    rff_kind_e       kind;
    rff_form_e       form;
    logic [5:0][4:0] idx;   // idx[k] = k-th index as listed, 1..N-1
  } rff_t;

  // Number of linear terms and of two-variable products of each shape.
  // The linear indices come first in idx[], the product pairs after them.
  function automatic int unsigned rff_nlin(rff_kind_e k);
    case (k)
      RFF_F1:  return 2;
      RFF_F2:  return 1;
      default: return 4;
    endcase
  endfunction

  function automatic int unsigned rff_nprod(rff_kind_e k);
    return (k == RFF_F2) ? 2 : 1;
  endfunction

  function automatic int unsigned rff_nidx(rff_kind_e k);
    return rff_nlin(k) + 2 * rff_nprod(k);
  endfunction

  function automatic rff_t mk_rff(rff_kind_e k, rff_form_e f,
                                  logic [4:0] i0, logic [4:0] i1,
                                  logic [4:0] i2, logic [4:0] i3,
                                  logic [4:0] i4 = 5'd0, logic [4:0] i5 = 5'd0);
    rff_t r;
    r.kind   = k;
    r.form   = f;
    r.idx[0] = i0;
    r.idx[1] = i1;
    r.idx[2] = i2;
    r.idx[3] = i3;
    r.idx[4] = i4;
    r.idx[5] = i5;
    return r;
  endfunction

  // Length N_i of NLFSR A_{i+1}.
  function automatic int unsigned nlfsr_len(int unsigned i);
    return (i < 12) ? 6 + i : (i == 12) ? 19 : (i == 13) ? 21 : (i == 14) ? 22 : 23;
  endfunction

  // Position of A_{i+1}'s cell 0 in the 223-bit state vector.
  function automatic int unsigned nlfsr_off(int unsigned i);
    int unsigned s = 0;
    for (int unsigned j = 0; j < i; j++) s += nlfsr_len(j);
    return s;
  endfunction

  // First member of each set S_{N_i}, basic form; element [i] belongs to A_{i+1}.
  localparam rff_t [NUM_NLFSR-1:0] DEFAULT_RFF = '{
    mk_rff(RFF_F2, FORM_BASIC,  3, 13, 19, 18, 19),       // A16, N=23: 3,(13,19),(18,19)
    mk_rff(RFF_F2, FORM_BASIC,  1,  4, 10, 11, 18),       // A15, N=22: 1,(4,10),(11,18)
    mk_rff(RFF_F3, FORM_BASIC,  1, 15, 17, 19, 13, 15),   // A14, N=21: 1,15,17,19,(13,15)
    mk_rff(RFF_F1, FORM_BASIC,  7, 10,  6, 18),           // A13, N=19: 7,10,(6,18)
    mk_rff(RFF_F2, FORM_BASIC,  1,  7, 10,  9, 15),       // A12, N=17: 1,(7,10),(9,15)
    mk_rff(RFF_F1, FORM_BASIC,  2, 13,  2,  3),           // A11, N=16: 2,13,(2,3)
    mk_rff(RFF_F1, FORM_BASIC,  5,  9,  2, 11),           // A10, N=15: 5,9,(2,11)
    mk_rff(RFF_F1, FORM_BASIC,  1,  2,  7, 12),           // A9,  N=14: 1,2,(7,12)
    mk_rff(RFF_F1, FORM_BASIC,  1, 11,  5,  9),           // A8,  N=13: 1,11,(5,9)
    mk_rff(RFF_F1, FORM_BASIC,  3,  8,  3,  9),           // A7,  N=12: 3,8,(3,9)
    mk_rff(RFF_F1, FORM_BASIC,  1,  9,  1,  4),           // A6,  N=11: 1,9,(1,4)
    mk_rff(RFF_F1, FORM_BASIC,  1,  2,  8,  9),           // A5,  N=10: 1,2,(8,9)
    mk_rff(RFF_F1, FORM_BASIC,  1,  6,  4,  6),           // A4,  N=9:  1,6,(4,6)
    mk_rff(RFF_F1, FORM_BASIC,  1,  5,  1,  5),           // A3,  N=8:  1,5,(1,5)
    mk_rff(RFF_F1, FORM_BASIC,  1,  2,  2,  6),           // A2,  N=7:  1,2,(2,6)
    mk_rff(RFF_F1, FORM_BASIC,  1,  2,  1,  2)            // A1,  N=6:  1,2,(1,2)
  };

endpackage
