// fp_decoder -- splits an IEEE754-style floating-point word into the fields
// an FDP processing element consumes.
//
// The PE of the array takes its operands already taken apart: a NaN flag
// (isNaN), a flush-to-zero flag (FTZ), the biased exponent (Scale), the
// significand with its hidden one made explicit (1.F) and the sign. This
// block produces those fields from a word of WE exponent and WF fraction
// bits (bfloat16: 8/7, binary32: 8/23, binary64: 11/52).
//
// Choices of this design (the field names follow the PE; their encodings do
// not come from any source):
//  * An all-ones exponent (infinity or NaN) raises isNaN; infinities are not
//    carried separately, since a fixed-point accumulator cannot hold them.
//  * A zero exponent (zero or subnormal) raises FTZ and forces 1.F to zero:
//    subnormal inputs are flushed to zero.
//
// Purely combinational; no clock.
module fp_decoder #(
  parameter int unsigned WE = 8,
  parameter int unsigned WF = 7
) (
  input  logic [WE+WF:0] x,       // {sign, exponent, fraction}
  output logic           is_nan,  // exponent all ones
  output logic           ftz,     // zero or subnormal, flushed to zero
  output logic           sign,
  output logic [WE-1:0]  scale,   // biased exponent
  output logic [WF:0]    sig      // 1.F (0 when flushed)
);
  logic [WE-1:0] e;
  logic [WF-1:0] f;

  always_comb begin
    e      = x[WE+WF-1:WF];
    f      = x[WF-1:0];
    sign   = x[WE+WF];
    is_nan = &e;
    ftz    = ~|e;
    scale  = e;
    sig    = ftz ? '0 : {1'b1, f};
  end
endmodule
