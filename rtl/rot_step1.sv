// rot_step1: first step of the direct fast-rotation estimate (Fig. 14).
//
// From the 2x2 block [a b; c d] it forms the numerators and denominators of
// the two intermediate angles
//     tan(alpha) = (c+b)/(d-a),   tan(beta) = (c-b)/(d+a),
// their sign bits (MSB of the two's-complement sum), the magnitudes
//     N1 = |c+b|, D1 = 2|d-a|, N2 = |c-b|, D2 = 2|d+a|,
// and the exponent differences K1 = e(D1) - e(N1), K2 = e(D2) - e(N2), where
// e() is a priority encoder. A negative K is flagged by its sign bit (the
// "Ov" output of the final subtractors in the figure). N1 = 0 and N2 = 0 come
// from the valid outputs of the numerator encoders.
//
// Purely combinational. The sums are one bit wider than the inputs so that no
// saturation is needed (the paper asks for adders "at least of the same size
// as the matrix input"; one extra bit is this design's choice). D1 and D2 are
// the doubled magnitudes as in Algorithm 3; the paper's figure draws the "<<1"
// after the priority encoder, here the doubling is done on the value, which is
// what Algorithm 3 and the 1.5*D1 comparison of step 2 need.
module rot_step1
  import nsvd_pkg::*;
#(
  parameter int unsigned DW = 16
) (
  input  logic signed [DW-1:0] a, b, c, d,
  output logic [DW:0]          n1, n2,     // |c+b|, |c-b|
  output logic [DW+1:0]        d1, d2,     // 2|d-a|, 2|d+a|
  output logic signed [LW:0]   k1, k2,     // exponent differences
  output logic                 sn1, sd1, sn2, sd2, // sign bits, 1 = negative
  output logic                 n1z, n2z    // N1 == 0, N2 == 0
);
  logic signed [DW:0] s_n1, s_d1, s_n2, s_d2;
  logic [LW-1:0] e_n1, e_n2, e_d1, e_d2;
  logic v_n1, v_n2, v_d1, v_d2;

  always_comb begin
    s_n1 = (DW+1)'(c) + (DW+1)'(b);
    s_d1 = (DW+1)'(d) - (DW+1)'(a);
    s_n2 = (DW+1)'(c) - (DW+1)'(b);
    s_d2 = (DW+1)'(d) + (DW+1)'(a);
    sn1  = s_n1[DW];
    sd1  = s_d1[DW];
    sn2  = s_n2[DW];
    sd2  = s_d2[DW];
    // |x|: ones-complement of a negative value plus one
    n1   = sn1 ? (~s_n1 + 1'b1) : s_n1;
    n2   = sn2 ? (~s_n2 + 1'b1) : s_n2;
    d1   = {(sd1 ? (~s_d1 + 1'b1) : s_d1), 1'b0};
    d2   = {(sd2 ? (~s_d2 + 1'b1) : s_d2), 1'b0};
  end

  prio_enc #(.W(DW+1), .EW(LW)) u_pe_n1 (.x(n1), .e(e_n1), .v(v_n1));
  prio_enc #(.W(DW+1), .EW(LW)) u_pe_n2 (.x(n2), .e(e_n2), .v(v_n2));
  prio_enc #(.W(DW+2), .EW(LW)) u_pe_d1 (.x(d1), .e(e_d1), .v(v_d1));
  prio_enc #(.W(DW+2), .EW(LW)) u_pe_d2 (.x(d2), .e(e_d2), .v(v_d2));

  always_comb begin
    k1  = signed'({1'b0, e_d1}) - signed'({1'b0, e_n1});
    k2  = signed'({1'b0, e_d2}) - signed'({1'b0, e_n2});
    n1z = ~v_n1;
    n2z = ~v_n2;
  end

  // The denominator valid bits are not needed: a zero denominator encodes to
  // 0, which makes K <= 0 and saturates l to its minimum in step 2.
  logic unused_v;
  assign unused_v = v_d1 ^ v_d2;
endmodule
