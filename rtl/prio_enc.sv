// prio_enc: priority encoder (P-Enc) returning floor(log2(x)) and a valid bit.
//
// For x != 0 the output e is the index of the most significant one of x and
// v = 1; for x = 0 the result is (0, 0). This is the fixed-point replacement
// for the exponent field of a floating-point number that the rotation-angle
// calculation uses. Purely combinational.
//
// Ports: x (W bits) in, e (EW bits) and v out. The paper's P-Enc with its
// valid output; the (0, 0) result for x = 0 is this design's choice.
module prio_enc #(
  parameter int unsigned W  = 18,
  parameter int unsigned EW = 6
) (
  input  logic [W-1:0]  x,
  output logic [EW-1:0] e,
  output logic          v
);
  always_comb begin
    e = '0;
    v = 1'b0;
    for (int unsigned i = 0; i < W; i++) begin
      if (x[i]) begin
        e = EW'(i);
        v = 1'b1;
      end
    end
  end
endmodule
