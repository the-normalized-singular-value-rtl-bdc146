// nsvd_pkg: types and constants shared by the fast-rotation SVD datapath.
//
// A fast (approximate) Givens rotation is fully described by a handful of
// control bits instead of a sine/cosine pair: the tangent of its half angle is
// t = +/-2^-l, and the double-rotation coefficients that are actually applied
// are cos' = (1 - t^2) and sin' = 2 t, each later scaled by 1/(1 + t^2).
// rot_t carries exactly the signals that the diagonal processor transmits to
// the processors of its row and column: the exponent l, its sign, the flag
// "l equals zero" (t = 0, i.e. no rotation) and the form of the matrix
// ([c s; -s c] or the column-swapped [s c; c -s] that keeps the diagonal
// ordered).
//
// The transmitted quantities (l, sign, S_N1 for the form) follow the paper;
// packing them into one struct, and the 6-bit exponent width LW (enough for
// l up to 63), are this design's choices. No timing: types and functions only.
package nsvd_pkg;

  // Width of a rotation exponent l. l never exceeds the data width + 4, so six
  // bits cover data widths up to 59 bits.
  localparam int unsigned LW = 6;

  typedef logic [LW-1:0] lexp_t;

  typedef struct packed {
    lexp_t l;      // tangent exponent, t = 2^-l (l = 0 means t = 0)
    logic  neg;    // 1: the rotation angle is negative (sign bit convention)
    logic  lz;     // 1: l == 0
    logic  swap;   // 1: use the form [s c; c -s] instead of [c s; -s c]
  } rot_t;

  // Descriptor of one coefficient of a rotation matrix, as seen by a
  // Multiply block: which function (sine or cosine) and whether the
  // coefficient is negative.
  typedef struct packed {
    logic sin_q;   // 1: multiply by sin' = 2t, 0: by cos' = 1 - t^2
    logic neg;     // 1: the coefficient is negative
  } coef_t;

  // Coefficient (row r, column c) of a rotation matrix with sign neg and
  // form swap (only these two fields of a rot_t decide it).
  //   plain form : [ c  s ; -s  c ]
  //   swap form  : [ s  c ;  c -s ]
  function automatic coef_t rot_coef(logic neg, logic swap, int unsigned r, int unsigned c);
    coef_t k;
    if (!swap) begin
      k.sin_q = (r != c);
      k.neg   = (r != c) ? (neg ^ (r == 1)) : 1'b0;
    end else begin
      k.sin_q = (r == c);
      k.neg   = (r == c) ? (neg ^ (r == 1)) : 1'b0;
    end
    return k;
  endfunction

  // Comp? input of a Multiply block: one when the shifted operand has to be
  // negated. A cosine with l != 0 subtracts A>>2l from A; a sine is negated
  // when negative; with l == 0 a sine is forced to zero by computing A - A.
  function automatic logic comp_of(coef_t k, logic lz);
    return k.sin_q ? (k.neg | lz) : ~lz;
  endfunction

endpackage
