// c2s -- two's-complement to sign-magnitude converter (C2S) at the output of
// the G2 function.
//
// A W-bit two's-complement value becomes a W-bit sign-magnitude value: the
// sign bit is copied, the magnitude is the absolute value. The single value
// that has no sign-magnitude twin, -2^(W-1), is clipped to the largest
// magnitude (a choice of this design; G2 never produces it because its
// operands come from narrower sign-magnitude values). Zero comes out positive.
// Purely combinational.
module c2s #(
  parameter int unsigned W = 6   // width in bits of input and output
) (
  input  logic [W-1:0] tc_i,     // two's-complement value
  output logic [W-1:0] sm_o      // sign-magnitude value
);
  localparam logic [W-1:0] MAG_MAX = (W'(1) << (W - 1)) - W'(1);

  logic [W-1:0] mag;

  always_comb begin
    mag = tc_i[W-1] ? (~tc_i + W'(1)) : tc_i;
    if (mag > MAG_MAX) mag = MAG_MAX;
    sm_o = {tc_i[W-1], mag[W-2:0]};
  end
endmodule
