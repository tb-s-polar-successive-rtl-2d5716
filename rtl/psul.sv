// psul -- partial-sum update logic (backward hard-decision calculation).
//
// Combines the codeword estimate z of the left sub-decoder with the estimate
// x of the right sub-decoder into the codeword estimate of their parent:
//   beta[2j] = z[j] XOR x[j],   beta[2j+1] = x[j]
// i.e. H XOR gates. The even/odd interleave is the bit-reversed ordering the
// decoder uses throughout, so that F and G always combine neighbouring LLRs.
// Purely combinational; its XORs chain through the levels of the tree.
module psul #(
  parameter int unsigned H = 512   // half the parent's length
) (
  input  logic [H-1:0]   z_i,
  input  logic [H-1:0]   x_i,
  output logic [2*H-1:0] beta_o
);
  always_comb
    for (int unsigned j = 0; j < H; j++) begin
      beta_o[2*j]   = z_i[j] ^ x_i[j];
      beta_o[2*j+1] = x_i[j];
    end
endmodule
