// fr_scale: the "Scale" block, multiplication by 1/(1 + 2^-2l) (Fig. 22).
//
// Uses the expansion 1/(1+t^2) = (1 - t^2)(1 + t^4)(1 + t^8)(1 + t^16)... and
// the repeating bit pattern of the factor (Table 2 of the paper): a barrel
// shifter and a subtractor form Z0 = G - (G >>> 2l), then three
// shift-and-accumulate stages add a fixed-shift copy chosen by a multiplexer:
//     Z1 = Z0 + {Z0>>>4 | 0}
//     Z2 = Z1 + {Z1>>>8 | Z1>>>12 | Z1>>>20 | 0}
//     Z3 = Z2 + {Z2>>>16 | Z2>>>28 | Z0>>>24 | 0}
// The selections per l are those of the last column of Table 2:
//     l=1: >>4, >>8, >>16     l=2: -, >>8, >>16    l=3: -, >>12, Z0>>24
//     l=4: -, -, >>16         l=5: -, >>20, -      l=6: -, -, Z0>>24
//     l=7: -, -, >>28         8 <= l <= 15: Z0 only
// For l >= 16 the factor rounds to one, and for l = 0 (t = 0) it is exactly
// one; in both cases G passes unchanged (the l = 0 bypass is this design's
// addition, Table 2 starts at l = 1). All stages of the 32-bit circuit are
// kept, whatever the data width. Purely combinational.
module fr_scale
  import nsvd_pkg::*;
#(
  parameter int unsigned W = 19
) (
  input  logic signed [W-1:0] g,
  input  lexp_t               l,
  input  logic                lz,
  output logic signed [W-1:0] y
);
  logic signed [W-1:0] z0, z1, z2, z3, m1, m2, m3;
  logic [LW:0] amt;

  always_comb begin
    amt = {l, 1'b0};
    z0  = g - (g >>> amt);
    unique case (l)
      LW'(1):  m1 = z0 >>> 4;
      default: m1 = '0;
    endcase
    z1 = z0 + m1;
    unique case (l)
      LW'(1), LW'(2): m2 = z1 >>> 8;
      LW'(3):         m2 = z1 >>> 12;
      LW'(5):         m2 = z1 >>> 20;
      default:        m2 = '0;
    endcase
    z2 = z1 + m2;
    unique case (l)
      LW'(1), LW'(2), LW'(4): m3 = z2 >>> 16;
      LW'(7):                 m3 = z2 >>> 28;
      LW'(3), LW'(6):         m3 = z0 >>> 24;
      default:                m3 = '0;
    endcase
    z3 = z2 + m3;
    y  = (lz || l >= LW'(16)) ? g : z3;
  end
endmodule
