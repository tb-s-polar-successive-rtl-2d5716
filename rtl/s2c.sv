// s2c -- sign-magnitude to two's-complement converter (S2C) at the inputs of
// the G2 function.
//
// The decoder stores LLRs in sign-magnitude form; the adder and subtractor of
// G2 work in two's complement. With Q bits, a sign-magnitude value has a
// magnitude of at most 2^(Q-1)-1, so the two's-complement result fits in the
// same Q bits. Negative zero maps to 0. Purely combinational.
module s2c #(
  parameter int unsigned Q = 5   // LLR width in bits (sign included)
) (
  input  logic [Q-1:0] sm_i,     // sign-magnitude LLR
  output logic [Q-1:0] tc_o      // the same value, two's complement
);
  localparam logic [Q-1:0] MAG_MASK = (Q'(1) << (Q - 1)) - Q'(1);

  logic [Q-1:0] mag;

  always_comb begin
    mag  = sm_i & MAG_MASK;
    tc_o = sm_i[Q-1] ? (~mag + Q'(1)) : mag;
  end
endmodule
