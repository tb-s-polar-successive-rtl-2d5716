// g2 -- the G2 function of successive cancellation decoding.
//
//   G2(l1, l2, z) = (1 - 2z) * l1 + l2
//
// Built as in the published G2 diagram: both inputs go through S2C
// converters, an adder forms l1'+l2' and a subtractor l2'-l1' in parallel, and
// the hard-decision feedback z (which arrives late through the partial-sum
// XOR chain) only drives the final 2:1 multiplexer (z=1 selects l2'-l1').
// A C2S converter returns the result to sign-magnitude. The output is one bit
// wider than the inputs, so no overflow can occur; the adaptive quantizer that
// follows decides how many bits are kept. Purely combinational.
module g2 #(
  parameter int unsigned Q = 5   // input LLR width in bits (sign included)
) (
  input  logic [Q-1:0] l1_i,
  input  logic [Q-1:0] l2_i,
  input  logic         z_i,      // hard-decision feedback from the left sub-decoder
  output logic [Q:0]   l3_o      // Q+1-bit sign-magnitude result
);
  logic [Q-1:0] t1, t2;
  logic [Q:0]   sum, diff, sel;

  s2c #(.Q(Q)) u_s2c1 (.sm_i(l1_i), .tc_o(t1));
  s2c #(.Q(Q)) u_s2c2 (.sm_i(l2_i), .tc_o(t2));

  always_comb begin
    sum  = {t1[Q-1], t1} + {t2[Q-1], t2};
    diff = {t2[Q-1], t2} - {t1[Q-1], t1};
    sel  = z_i ? diff : sum;
  end

  c2s #(.W(Q + 1)) u_c2s (.tc_i(sel), .sm_o(l3_o));
endmodule
