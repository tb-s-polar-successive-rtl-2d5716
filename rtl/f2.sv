// f2 -- the F2 function of min-sum successive cancellation decoding.
//
//   F2(l1, l2) = sgn(l1) * sgn(l2) * min(|l1|, |l2|)
//
// On sign-magnitude LLRs this is an XOR of the two sign bits and a
// compare-and-select (C&S) of the two magnitudes, exactly the structure of
// the published F2 diagram. Input and output have the same width Q; a 1-bit
// LLR is a sign alone. Purely combinational.
module f2 #(
  parameter int unsigned Q = 5   // LLR width in bits (sign included)
) (
  input  logic [Q-1:0] l1_i,
  input  logic [Q-1:0] l2_i,
  output logic [Q-1:0] l3_o
);
  localparam logic [Q-1:0] MAG_MASK = (Q'(1) << (Q - 1)) - Q'(1);

  logic [Q-1:0] m1, m2, m3;
  logic         s3;

  always_comb begin
    s3   = l1_i[Q-1] ^ l2_i[Q-1];            // XOR of the signs
    m1   = l1_i & MAG_MASK;
    m2   = l2_i & MAG_MASK;
    m3   = (m1 < m2) ? m1 : m2;              // compare and select
    l3_o = (Q'(s3) << (Q - 1)) | m3;
  end
endmodule
